// tb_sm_pmu -- self-checking test of one SM's PMU.
// Programs random event selects and a window period through the register
// port, drives random event signals during a kernel, and computes the
// expected per-window entries {ts, counts} in the testbench. Kernel 1 runs
// in validation mode (entries leave as packets, random backpressure);
// kernel 2 in profiling mode (entries land in a ring buffer in the memory
// model, which wraps); kernel 3 starves the packet port so the buffer
// overflows and entries are dropped.
module tb_sm_pmu;
  import ssp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_CNTR-1:0][EVENTS_PER_MUX-1:0] ev;
  logic        kstart, kend, vlaunch, cfg_we, pvalid, pready, wvalid, wready, running, vmode;
  logic [3:0]  cfg_addr;
  logic [31:0] cfg_wdata;
  sample_t     pdata;
  addr_t       waddr;
  logic [287:0] wdata;
  logic [15:0] drops, ridx, rwraps;
  int checks = 0, failures = 0;
  int unsigned sel [NUM_CNTR];
  sample_t exp_q[$];
  int unsigned npkts = 0;

  sm_pmu dut (.clk, .rst_n, .events_i(ev), .kstart_i(kstart), .kend_i(kend), .vlaunch_i(vlaunch),
    .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .pkt_valid_o(pvalid), .pkt_ready_i(pready), .pkt_data_o(pdata),
    .mem_wr_valid_o(wvalid), .mem_wr_ready_i(wready), .mem_wr_addr_o(waddr), .mem_wr_data_o(wdata),
    .running_o(running), .validate_o(vmode), .drops_o(drops), .ring_idx_o(ridx), .ring_wraps_o(rwraps));

  dev_mem_model mem (.clk, .wr_valid(wvalid && rst_n), .wr_ready(wready), .wr_addr(waddr), .wr_data(wdata),
    .rd_req_valid(1'b0), .rd_req_ready(), .rd_req_addr('0), .rd_resp_valid(), .rd_resp_data());

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

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  // packet checker
  always @(posedge clk) if (rst_n && pvalid && pready) begin
    sample_t e;
    e = exp_q.pop_front();
    check(pdata == e, $sformatf("packet ts %0d exp ts %0d", pdata.ts, e.ts));
    npkts++;
  end

  // Runs a kernel of len cycles with period p; expected entries go to exp_q
  // (all of them, or the first `keep` when the buffer is expected to drop).
  task automatic kernel(input int unsigned p, input int unsigned len, input int unsigned keep,
                        output sample_t ents[$]);
    int unsigned cnt [NUM_CNTR];
    ents = {};
    for (int c = 0; c < NUM_CNTR; c++) cnt[c] = 0;
    @(negedge clk); kstart = 1'b1; ev = '0;
    @(negedge clk); kstart = 1'b0;
    for (int unsigned cyc = 1; cyc <= len; cyc++) begin
      for (int c = 0; c < NUM_CNTR; c++) ev[c] = 8'($urandom);
      kend = (cyc == len);
      for (int c = 0; c < NUM_CNTR; c++) cnt[c] += ev[c][sel[c]];
      if ((cyc % p == 0) || cyc == len) begin
        sample_t s;
        s.last = (cyc == len); s.ts = cyc;
        for (int c = 0; c < NUM_CNTR; c++) begin s.cntr[c] = cnt[c]; cnt[c] = 0; end
        ents.push_back(s);
        if (ents.size() <= keep) exp_q.push_back(s);
      end
      @(negedge clk);
    end
    kend = 1'b0; ev = '1;   // events after the kernel must not count
    repeat (5) @(negedge clk);
    ev = '0;
  endtask

  initial begin
    sample_t ents[$];
    ev = '0; vlaunch = 0; kstart = 0; kend = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; pready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NUM_CNTR; c++) begin sel[c] = $urandom % 8; wr(4'(c), sel[c]); end
    wr(REG_PERIOD, 40);
    wr(REG_MODE, 1);
    check(vmode, "validation mode set");
    // ---- kernel 1: validation mode ----
    fork
      kernel(40, 1000, 1000, ents);
      repeat (1100) begin @(negedge clk); pready = ($urandom % 3) == 0; end
    join
    pready = 1'b1;
    repeat (60) @(negedge clk);
    check(exp_q.size() == 0 && npkts == 25, $sformatf("all %0d windows sent (%0d)", 25, npkts));
    check(drops == 0, "no drops with a draining consumer");
    check(mem.writes == 0, "no DMA traffic in validation mode");
    // ---- kernel 2: profiling mode, ring of 10 entries ----
    wr(REG_MODE, 0);
    wr(REG_RINGSIZE, 10);
    wr(REG_PERIOD, 25);
    wr(REG_RINGBASE, 32'h0010_0000);
    kernel(25, 500, 0, ents);
    repeat (50) @(negedge clk);
    check(mem.writes == 20, $sformatf("20 entries written (%0d) drops %0d idx %0d wraps %0d", mem.writes, drops, ridx, rwraps));
    check(rwraps == 2 && ridx == 0, "ring wrapped twice");
    for (int i = 10; i < 20; i++) begin
      logic [287:0] got;
      got = mem.peek(32'h0010_0000 + (i % 10) * 36);
      check(got == {ents[i].ts, ents[i].cntr}, $sformatf("ring slot %0d", i % 10));
    end
    check(npkts == 25, "no packets in profiling mode");
    // ---- kernel 3: validation mode, consumer stalled: buffer overflows ----
    wr(REG_MODE, 1);
    wr(REG_PERIOD, 5);
    pready = 1'b0;
    kernel(5, 100, 8, ents);
    check(drops == 12, $sformatf("20 windows into 8 slots: 12 dropped (%0d)", drops));
    pready = 1'b1;
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "the eight oldest entries kept");
    // a validated launch discards leftovers of an earlier kernel
    pready = 1'b0;
    kernel(5, 20, 0, ents);
    @(negedge clk); vlaunch = 1'b1;
    @(negedge clk); vlaunch = 1'b0; #1;
    check(!pvalid, "validated launch flushes the buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
