// tb_val_aggr_cache -- self-checking test of the PMU aggregation cache.
// A active PMUs each send one packet per window (ts = k*P), interleaved at
// random but in order per PMU, with at most ENTRIES windows of skew; the
// consumer stalls at random. The reference sums are computed in the
// testbench. Checks per-window sums, ts, the kernel-end flag, completion
// order, the one-PMU case, a full cache (stall), and clear.
module tb_val_aggr_cache;
  import ssp_pkg::*;
  localparam int A = 5, NW = 60, P = 100, ENT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       clear, ivalid, iready, ovalid, oready, stall;
  logic [7:0] nact;
  sample_t    idata, odata;
  logic [2:0] used;
  int checks = 0, failures = 0;
  int unsigned vals [A][NW][NUM_CNTR];
  int unsigned nxt [A];
  int unsigned got = 0, stalls = 0, max_used = 0;

  val_aggr_cache #(.ENTRIES(ENT)) dut (.clk, .rst_n, .clear_i(clear), .num_active_i(nact),
    .in_valid_i(ivalid), .in_ready_o(iready), .in_data_i(idata),
    .out_valid_o(ovalid), .out_ready_i(oready), .out_data_o(odata), .stall_o(stall), .used_o(used));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sample_t pkt(input int s, input int w);
    sample_t p;
    p.last = (w == NW - 1);
    p.ts   = (w + 1) * P;
    for (int m = 0; m < NUM_CNTR; m++) p.cntr[m] = vals[s][w][m];
    return p;
  endfunction

  // output checker
  always @(posedge clk) if (rst_n && !clear) begin
    if (stall) stalls++;
    if (used > max_used) max_used = used;
    if (ovalid && oready) begin
      bit ok;
      ok = 1;
      for (int m = 0; m < NUM_CNTR; m++) begin
        int unsigned sum;
        sum = 0;
        for (int s = 0; s < A; s++) sum += vals[s][got][m];
        if (odata.cntr[m] != sum) ok = 0;
      end
      check(ok, $sformatf("window %0d sums", got));
      check(odata.ts == (got + 1) * P, $sformatf("window ts %0d exp %0d", odata.ts, (got + 1) * P));
      check(odata.last == (got == NW - 1), "kernel-end flag");
      got++;
    end
  end

  initial begin
    int s, minw, tries;
    clear = 1'b0; ivalid = 1'b0; oready = 1'b0; idata = '0; nact = 8'(A);
    for (int a = 0; a < A; a++) for (int w = 0; w < NW; w++) for (int m = 0; m < NUM_CNTR; m++)
      vals[a][w][m] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    // ---- random interleaving of A PMUs ----
    while (1) begin
      minw = NW;
      for (int a = 0; a < A; a++) if (nxt[a] < minw) minw = nxt[a];
      if (minw == NW) break;
      do s = $urandom % A; while (!(nxt[s] < NW && nxt[s] < minw + ENT));
      ivalid = 1'b1; idata = pkt(s, nxt[s]);
      tries = 0;
      forever begin
        bit acc;
        oready = ($urandom % 3) != 0;
        #1 acc = iready;
        @(posedge clk);
        if (acc) break;
        @(negedge clk);
        tries++;
        if (tries == 1000) begin
          // every block waits for packets that can no longer be sent
          check(0, $sformatf("packet of PMU %0d window %0d held for 1000 cycles (%0d windows out)", s, nxt[s], got));
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
      nxt[s]++;
      @(negedge clk);
      ivalid = 1'b0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    oready = 1'b1;
    repeat (5) @(negedge clk);
    check(got == NW, $sformatf("%0d of %0d windows completed", got, NW));
    check(used == 0, "cache empty after the kernel");
    check(max_used == ENT, "cache filled to all blocks");
    // ---- one active PMU: each packet completes at once ----
    nact = 8'd1; got = 0;
    for (int w = 0; w < 3; w++) begin
      for (int m = 0; m < NUM_CNTR; m++) for (int a = 1; a < A; a++) vals[a][w][m] = 0;
      ivalid = 1'b1; idata = pkt(0, w);
      @(posedge clk); #1;
      @(negedge clk); ivalid = 1'b0;
    end
    @(negedge clk);
    check(got == 3, "one-PMU windows complete immediately");
    // ---- full cache: a new tag with all blocks in use is held ----
    nact = 8'd2;
    for (int w = 0; w < ENT; w++) begin
      ivalid = 1'b1; idata = pkt(0, w + 10);
      @(negedge clk);
    end
    idata = pkt(0, 20);
    #1;
    check(stall && !iready, "miss with every block in use is held");
    @(negedge clk);
    check(stall && !iready, "still held");
    ivalid = 1'b0;
    check(stalls > 0, "stall exercised");
    // ---- clear empties the cache ----
    clear = 1'b1; @(negedge clk); clear = 1'b0; #1;
    check(used == 0 && !ovalid, "clear empties the cache");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
