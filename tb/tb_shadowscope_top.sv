// tb_shadowscope_top -- end-to-end test of ShadowScope+ at full size
// (15 SMs, eight 32-bit counters per PMU, default buffer sizes).
//
// The SMs are replaced by an event generator: counter c of SM s selects
// event c of its group, and that event fires in a cycle with probability
// density[phase][c]/256, from a hash of (run seed, SM, counter, cycle). A
// kernel is a sequence of phases of four sampling windows each. The test
// follows the flow of the design:
//   1. profiling run: PMUs in profiling mode, DMA engines fill per-SM ring
//      buffers; every stored entry is checked against the counts the
//      testbench itself computed while driving the events;
//   2. the golden model (per-window sums over the active SMs) is built from
//      those ring buffers and placed in device memory;
//   3. benign run with a different seed (run-to-run noise) -> pass;
//   4. deviation attack (one phase executes extra events) -> the Validator
//      stops the kernel, the dispatcher ends it, the alarm names the kernel;
//   5. skipped phase (a mind-control style attack: one layer left out) ->
//      window-count failure;
//   6. overload: two-cycle windows flood the interconnect and the PMU
//      buffers overflow; then a PMU that never reports leaves every window
//      incomplete and the aggregation cache stalls; the next validated
//      launch flushes the leftovers and passes again.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_shadowscope_top;
  import ssp_pkg::*;
  localparam int NSM = 15, P = 256, WPP = 4, NPH = 3, NWIN = WPP * NPH, LEN = NWIN * P;
  localparam addr_t GBASE = 32'h0080_0000;
  localparam int TH = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NSM-1:0][NUM_CNTR-1:0][EVENTS_PER_MUX-1:0] ev;
  logic             launch, kend, stop, cfg_we;
  logic [7:0]       kid, cfg_target;
  logic [NSM-1:0]   mask;
  logic [15:0]      glen;
  logic [3:0]       cfg_addr;
  logic [31:0]      cfg_wdata;
  logic             mwv, mwr, mrqv, mrqr, mrsv;
  addr_t            mwa, mrqa;
  logic [287:0]     mwd, mrsd;
  logic             alarm, pass, vbusy, cstall;
  logic [7:0]       alarm_kid, mflags;
  fail_e            reason;
  logic [15:0]      wok;
  logic [NSM-1:0]   running, dropped;

  shadowscope_top dut (.clk, .rst_n, .sm_events_i(ev),
    .launch_i(launch), .launch_kid_i(kid), .launch_mask_i(mask), .launch_gbase_i(GBASE),
    .launch_glen_i(glen), .kend_i(kend), .stop_o(stop),
    .cfg_we_i(cfg_we), .cfg_target_i(cfg_target), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .mem_wr_valid_o(mwv), .mem_wr_ready_i(mwr), .mem_wr_addr_o(mwa), .mem_wr_data_o(mwd),
    .mem_rd_req_valid_o(mrqv), .mem_rd_req_ready_i(mrqr), .mem_rd_req_addr_o(mrqa),
    .mem_rd_resp_valid_i(mrsv), .mem_rd_resp_data_i(mrsd),
    .alarm_o(alarm), .alarm_kid_o(alarm_kid), .alarm_reason_o(reason), .alarm_metrics_o(mflags),
    .pass_o(pass), .windows_ok_o(wok), .sm_running_o(running), .pmu_dropped_o(dropped),
    .val_busy_o(vbusy), .cache_stall_o(cstall));

  dev_mem_model mem (.clk, .wr_valid(mwv && rst_n), .wr_ready(mwr), .wr_addr(mwa), .wr_data(mwd),
    .rd_req_valid(mrqv && rst_n), .rd_req_ready(mrqr), .rd_req_addr(mrqa),
    .rd_resp_valid(mrsv), .rd_resp_data(mrsd));

  int checks = 0, failures = 0;
  // mechanism counters
  int unsigned n_period_win = 0, n_end_win = 0, n_dma = 0, n_mode_switch = 0, n_pass = 0,
               n_stop_dev = 0, n_stop_win = 0, n_overflow = 0, n_stall = 0, n_recover = 0,
               n_windows_ok = 0;
  int unsigned exp_cnt [NSM][64][NUM_CNTR];
  int unsigned density [NPH][NUM_CNTR];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned hash(input int unsigned a, b, c, d);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D ^ d * 32'h27D4EB2F;
    x ^= x >> 15; x *= 32'h2C1B3C6D; x ^= x >> 12; x *= 32'h297A2D39; x ^= x >> 15;
    return x;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (mwv && mwr) n_dma++;
    if (cstall) n_stall++;
  end

  task automatic cfg(input int t, input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1'b1; cfg_target = 8'(t); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  // Runs one kernel. phases[] lists the phase index of each executed phase;
  // extra_c/extra_ph add `extra` to the density of one counter in one phase.
  // Stops early when the Validator asks for it. Returns the window count.
  task automatic run_kernel(input logic [7:0] k, input int unsigned seed, input int phases[$],
                            input int extra_ph, input int extra_c, input int extra,
                            input int period, output bit stopped);
    int len, cyc;
    len = phases.size() * WPP * period;
    stopped = 0;
    for (int s = 0; s < NSM; s++) for (int w = 0; w < 64; w++) for (int c = 0; c < NUM_CNTR; c++)
      exp_cnt[s][w][c] = 0;
    @(negedge clk); launch = 1'b1; kid = k;
    @(negedge clk); launch = 1'b0;
    for (cyc = 1; cyc <= len; cyc++) begin
      int ph, w, d;
      w  = (cyc - 1) / period;
      ph = phases[w / WPP];
      for (int s = 0; s < NSM; s++) for (int c = 0; c < NUM_CNTR; c++) begin
        d = density[ph][c] + ((ph == extra_ph && c == extra_c) ? extra : 0);
        for (int e = 0; e < EVENTS_PER_MUX; e++)
          ev[s][c][e] = (e == c) ? ((hash(seed, s, c, cyc) & 255) < d) : hash(seed + 1, s, c * 8 + e, cyc)[0];
        if (mask[s] && w < 64) exp_cnt[s][w][c] += ev[s][c][c];
      end
      if (cyc % period == 0 && cyc != len) n_period_win++;
      kend = (cyc == len) || stop;
      if (kend) begin
        n_end_win++;
        @(negedge clk);
        break;
      end
      @(negedge clk);
    end
    if (cyc < len) stopped = 1;
    kend = 1'b0; ev = '0;
  endtask

  initial begin
    int unsigned gold [NWIN][NUM_CNTR];
    bit stopped;
    int t0;
    ev = '0; launch = 0; kend = 0; kid = 0; cfg_we = 0; cfg_target = 0; cfg_addr = 0; cfg_wdata = 0;
    mask = 15'b111_1111_1101_1111;   // 14 of the 15 SMs run the kernel
    glen = NWIN;
    for (int ph = 0; ph < NPH; ph++) for (int c = 0; c < NUM_CNTR; c++)
      density[ph][c] = (ph == 0) ? 40 + 20 * c : 200 - 15 * c;   // phases 1 and 2 alike
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---------- configuration ----------
    for (int c = 0; c < NUM_CNTR; c++) cfg(NSM, 4'(c), c);      // counter c <- event c
    cfg(NSM, REG_PERIOD, P);
    cfg(NSM, REG_RINGSIZE, 64);
    cfg(NSM, REG_MODE, 0);
    for (int s = 0; s < NSM; s++) cfg(s, REG_RINGBASE, 32'h0010_0000 + s * 32'h1_0000);
    cfg(NSM + 1, VREG_THRESH, TH);

    // ---------- 1. profiling run ----------
    run_kernel(8'd1, 11, '{0, 1, 2}, -1, 0, 0, P, stopped);
    repeat (100) @(negedge clk);
    check(n_dma == 14 * NWIN, $sformatf("profiling: %0d entries written (%0d)", 14 * NWIN, n_dma));
    check(!vbusy && wok == 0, "Validator idle in profiling mode");
    for (int s = 0; s < NSM; s++) begin
      if (!mask[s]) continue;
      for (int w = 0; w < NWIN; w++) begin
        logic [287:0] e;
        bit ok;
        e = mem.peek(32'h0010_0000 + s * 32'h1_0000 + w * 36);
        ok = (e[287:256] == (w + 1) * P);
        for (int c = 0; c < NUM_CNTR; c++) if (e[c*32 +: 32] != exp_cnt[s][w][c]) ok = 0;
        check(ok, $sformatf("ring entry SM %0d window %0d", s, w));
      end
    end
    check(mem.peek(32'h0010_0000 + 5 * 32'h1_0000) == '0, "idle SM wrote nothing");

    // ---------- 2. golden model from the profile ----------
    for (int w = 0; w < NWIN; w++) begin
      logic [287:0] g;
      g = '0;
      g[287:256] = (w + 1) * P;
      for (int c = 0; c < NUM_CNTR; c++) begin
        gold[w][c] = 0;
        for (int s = 0; s < NSM; s++) if (mask[s]) gold[w][c] += exp_cnt[s][w][c];
        g[c*32 +: 32] = gold[w][c];
      end
      mem.poke(GBASE + w * 36, g);
    end
    cfg(NSM, REG_MODE, 1); n_mode_switch++;
    cfg(NSM + 1, VREG_ENABLE, 1);

    // ---------- 3. benign run ----------
    n_dma = 0;
    run_kernel(8'd2, 22, '{0, 1, 2}, -1, 0, 0, P, stopped);
    t0 = 0; while (!pass && !stop && t0 < 500) begin @(negedge clk); t0++; end
    check(pass && !alarm && !stopped, "benign kernel validated");
    if (pass) n_pass++;
    check(wok == NWIN, $sformatf("%0d windows validated (%0d)", NWIN, wok));
    n_windows_ok += wok;
    check(t0 < 100, $sformatf("verdict %0d cycles after kernel end", t0));
    check(n_dma == 0, "no DMA traffic in validation mode");

    // ---------- 4. deviation attack in phase 2, counter 5 ----------
    repeat (10) @(negedge clk);
    run_kernel(8'd3, 33, '{0, 1, 2}, 1, 5, 80, P, stopped);
    repeat (20) @(negedge clk);
    check(stopped && alarm && alarm_kid == 8'd3, "attack kernel stopped and reported");
    check(reason == FAIL_DEVIATION && mflags[5], $sformatf("deviation on counter 5 (flags %b)", mflags));
    check(wok == WPP, $sformatf("phase 1 validated before the deviation (%0d)", wok));
    check(running == '0, "kernel halted on all SMs");
    if (stopped && reason == FAIL_DEVIATION) n_stop_dev++;
    n_windows_ok += wok;

    // ---------- 5. skipped phase ----------
    run_kernel(8'd4, 44, '{0, 2}, -1, 0, 0, P, stopped);
    repeat (20) @(negedge clk);
    check(alarm && alarm_kid == 8'd4 && reason == FAIL_WINDOWS, "skipped phase detected");
    check(wok == 2 * WPP, $sformatf("windows before the missing phase matched (%0d)", wok));
    if (alarm && reason == FAIL_WINDOWS) n_stop_win++;
    n_windows_ok += wok;

    // ---------- 6. overload, then recovery ----------
    cfg(NSM, REG_PERIOD, 2);
    cfg(NSM + 1, VREG_THRESH, 32'hFFFF_FFFF);   // no deviation verdict: isolate the overload
    glen = 16'hFFFF;
    run_kernel(8'd5, 55, '{0, 1, 2}, -1, 0, 0, 2, stopped);
    repeat (50) @(negedge clk);
    n_overflow = $countones(dropped);
    check(n_overflow > 0, "PMU buffers overflowed");
    check(vbusy && !pass, "overloaded kernel gets no verdict");
    cfg(NSM, REG_PERIOD, P);
    cfg(NSM + 1, VREG_THRESH, TH);
    glen = NWIN;
    // a PMU that never reports (SM 0 left in profiling mode): every window
    // stays incomplete, the aggregation cache fills and holds the ICNT
    cfg(0, REG_MODE, 0);
    run_kernel(8'd7, 77, '{0, 1, 2}, -1, 0, 0, P, stopped);
    repeat (50) @(negedge clk);
    check(n_stall > 0 && vbusy && !pass && wok == 0, "silent PMU: cache stalls, no verdict");
    cfg(0, REG_MODE, 1);
    run_kernel(8'd6, 66, '{0, 1, 2}, -1, 0, 0, P, stopped);
    t0 = 0; while (!pass && !stop && t0 < 500) begin @(negedge clk); t0++; end
    check(pass && !alarm, "validation recovers after an overload");
    if (pass) n_recover++;
    n_windows_ok += wok;

    // ---------- mechanism coverage ----------
    $display("mechanisms: period windows %0d, kernel-end windows %0d, profiling DMA writes %0d (run 1),",
             n_period_win, n_end_win, 14 * NWIN);
    $display("  mode switches %0d, windows validated %0d, passes %0d, deviation stops %0d,",
             n_mode_switch, n_windows_ok, n_pass + n_recover, n_stop_dev);
    $display("  window-count stops %0d, PMUs overflowed %0d, cache-stall cycles %0d, recoveries %0d",
             n_stop_win, n_overflow, n_stall, n_recover);
    check(n_period_win > 0, "period windows happened");
    check(n_end_win > 0, "kernel-end windows happened");
    check(n_mode_switch > 0, "mode switch happened");
    check(n_windows_ok > 0, "windows validated");
    check(n_pass > 0, "pass verdict happened");
    check(n_stop_dev > 0, "deviation stop happened");
    check(n_stop_win > 0, "window-count stop happened");
    check(n_overflow > 0, "buffer overflow happened");
    check(n_stall > 0, "aggregation cache stall happened");
    check(n_recover > 0, "recovery happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
