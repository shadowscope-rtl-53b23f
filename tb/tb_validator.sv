// tb_validator -- self-checking test of the Validator.
// A golden model of L windows (eight metrics each, summed over A SMs) is
// placed in the memory model. The testbench then plays the PMU packets of a
// kernel on A SMs whose per-SM values add up to the golden sums plus noise
// below the threshold, and checks the verdict:
//   benign kernel            -> pass_o, L windows validated, no alarm
//   one deviating window k   -> stop_o pulse, alarm with kernel id, reason
//                               FAIL_DEVIATION, deviating metric flagged,
//                               k windows validated before it
//   kernel missing a window  -> FAIL_WINDOWS (a skipped phase)
//   kernel with extra window -> FAIL_WINDOWS
//   validation disabled      -> launch ignored
// followed by 60 random kernels (length L-1..L+1, with or without one
// deviating window) whose expected verdict is worked out from how they
// were built.
module tb_validator;
  import ssp_pkg::*;
  localparam int A = 4, L = 12;
  localparam addr_t GBASE = 32'h0002_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cfg_we, launch, stop, pvalid, pready, rqv, rqr, rsv, alarm, pass, busy, cstall;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  logic [7:0]  kid_in, kid_out;
  logic [7:0]  nact;
  logic [15:0] glen, wok;
  sample_t     pdata;
  addr_t       rqa;
  logic [287:0] rsd;
  fail_e       reason;
  logic [7:0]  mflags;
  int checks = 0, failures = 0;
  int unsigned gold [L][NUM_CNTR];
  int unsigned nstop = 0, npass = 0;
  localparam int unsigned TH = 50;

  validator dut (.clk, .rst_n, .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .launch_i(launch), .launch_kid_i(kid_in), .launch_active_i(nact), .launch_gbase_i(GBASE),
    .launch_glen_i(glen), .stop_o(stop),
    .pkt_valid_i(pvalid), .pkt_ready_o(pready), .pkt_data_i(pdata),
    .rd_req_valid_o(rqv), .rd_req_ready_i(rqr), .rd_req_addr_o(rqa),
    .rd_resp_valid_i(rsv), .rd_resp_data_i(rsd),
    .alarm_o(alarm), .alarm_kid_o(kid_out), .alarm_reason_o(reason), .alarm_metrics_o(mflags),
    .pass_o(pass), .windows_ok_o(wok), .busy_o(busy), .cache_stall_o(cstall));

  dev_mem_model mem (.clk, .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0),
    .rd_req_valid(rqv && rst_n), .rd_req_ready(rqr), .rd_req_addr(rqa), .rd_resp_valid(rsv), .rd_resp_data(rsd));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (stop) nstop++;
    if (pass) npass++;
  end

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  task automatic send(input sample_t p);
    bit acc;
    pvalid = 1'b1; pdata = p;
    forever begin
      #1 acc = pready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    @(negedge clk); pvalid = 1'b0;
  endtask

  // Plays a kernel of nw windows; window `bad` (if < nw) gets metric `bm`
  // off by `delta`. Per-SM shares add up to gold + noise, |noise| <= TH.
  task automatic play(input int nw, input int bad, input int bm, input int unsigned delta);
    for (int w = 0; w < nw; w++) begin
      int unsigned share [A][NUM_CNTR];
      for (int m = 0; m < NUM_CNTR; m++) begin
        int unsigned rest, tgt;
        tgt = gold[w % L][m] + $urandom_range(0, TH) - TH / 2;
        if (w == bad && m == bm) tgt += delta;
        rest = tgt;
        for (int a = 0; a < A - 1; a++) begin share[a][m] = $urandom % (rest + 1); rest -= share[a][m]; end
        share[A-1][m] = rest;
      end
      for (int a = 0; a < A; a++) begin
        sample_t p;
        p.last = (w == nw - 1); p.ts = (w + 1) * 64;
        for (int m = 0; m < NUM_CNTR; m++) p.cntr[m] = share[a][m];
        send(p);
      end
    end
  endtask

  task automatic launch_k(input logic [7:0] k);
    @(negedge clk); launch = 1'b1; kid_in = k;
    @(negedge clk); launch = 1'b0;
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; launch = 0; kid_in = 0; nact = A; glen = L;
    pvalid = 0; pdata = '0;
    for (int w = 0; w < L; w++) begin
      logic [287:0] e;
      e[287:256] = (w + 1) * 64;
      for (int m = 0; m < NUM_CNTR; m++) begin
        gold[w][m] = 1000 + $urandom % 100000;
        e[m*32 +: 32] = gold[w][m];
      end
      mem.poke(GBASE + w * 36, e);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- disabled: launch ignored ----
    launch_k(8'd1);
    #1 check(!busy, "launch ignored while disabled");
    wr(VREG_THRESH, TH);
    wr(VREG_ENABLE, 1);
    // ---- benign kernel ----
    launch_k(8'd7);
    #1 check(busy, "validating after launch");
    play(L, -1, 0, 0);
    repeat (20) @(negedge clk);
    check(npass == 1 && nstop == 0 && !alarm, $sformatf("benign kernel passes: pass %0d stop %0d reason %0d flags %b wok %0d", npass, nstop, reason, mflags, wok));
    check(wok == L, $sformatf("%0d windows validated (%0d)", L, wok));
    check(mem.reads == L, "golden model read once per window");
    // ---- deviation in window 5, metric 3 ----
    launch_k(8'd9);
    play(L, 5, 3, 5 * TH);
    repeat (20) @(negedge clk);
    check(nstop == 1 && alarm, "deviating kernel stopped");
    check(kid_out == 8'd9, "offending kernel reported");
    check(reason == FAIL_DEVIATION && mflags == 8'b0000_1000, "deviation on metric 3");
    check(wok == 5, $sformatf("five windows passed before the deviation (%0d)", wok));
    check(npass == 1, "no pass for a stopped kernel");
    // ---- deviation just above threshold with negative sign ----
    launch_k(8'd10);
    play(3, 1, 0, -(TH + TH / 2 + 1));
    repeat (20) @(negedge clk);
    check(nstop == 2 && reason == FAIL_DEVIATION && wok == 1, "negative deviation caught");
    // ---- kernel with a missing window (skipped phase) ----
    launch_k(8'd11);
    play(L - 1, -1, 0, 0);
    repeat (20) @(negedge clk);
    check(nstop == 3 && reason == FAIL_WINDOWS && kid_out == 8'd11, "missing window caught");
    // ---- kernel with an extra window ----
    launch_k(8'd12);
    play(L + 1, -1, 0, 0);
    repeat (20) @(negedge clk);
    check(nstop == 4 && reason == FAIL_WINDOWS && wok == L, "extra window caught");
    // ---- a new launch clears the alarm; benign again ----
    launch_k(8'd13);
    #1 check(!alarm, "alarm cleared by the next launch");
    play(L, -1, 0, 0);
    repeat (20) @(negedge clk);
    check(npass == 2 && nstop == 4, "second benign kernel passes");
    // ---- random kernels: length L-1..L+1, optional deviation ----
    for (int k = 0; k < 60; k++) begin
      int nw, bad, bm, sgn;
      int unsigned pstop, ppass, delta;
      nw  = L - 1 + $urandom_range(0, 2);
      bad = ($urandom_range(0, 1) == 1) ? $urandom_range(0, nw - 2) : -1;
      bm  = $urandom_range(0, NUM_CNTR - 1);
      sgn = $urandom_range(0, 1);
      delta = 2 * TH + $urandom_range(0, 1000);
      if (sgn == 1) delta = -delta;
      pstop = nstop; ppass = npass;
      launch_k(8'(20 + k));
      play(nw, bad, bm, delta);
      repeat (20) @(negedge clk);
      if (bad >= 0) begin
        check(nstop == pstop + 1 && alarm && reason == FAIL_DEVIATION && mflags[bm] && kid_out == 8'(20 + k),
              $sformatf("random kernel %0d: deviation in window %0d metric %0d caught", k, bad, bm));
        check(wok == 16'(bad), $sformatf("random kernel %0d: %0d windows before the deviation (%0d)", k, bad, wok));
      end else if (nw != L) begin
        check(nstop == pstop + 1 && alarm && reason == FAIL_WINDOWS && kid_out == 8'(20 + k),
              $sformatf("random kernel %0d: %0d windows against %0d caught", k, nw, L));
      end else begin
        check(npass == ppass + 1 && nstop == pstop && !alarm && wok == L,
              $sformatf("random kernel %0d: benign kernel passes", k));
      end
      check(!busy, $sformatf("random kernel %0d: Validator idle after the verdict", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
