// tb_pmu_window_ctrl -- self-checking test of the PMU cycle counter and
// sampling-window logic: period windows, kernel-end windows, period 0, and
// a kernel end that coincides with a period boundary. The expected window
// ends and timestamps are computed by the testbench from the start cycle.
module tb_pmu_window_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, kend, run, win_end, last;
  logic [31:0] period, ts;
  int checks = 0, failures = 0;

  pmu_window_ctrl dut (.clk, .rst_n, .start_i(start), .end_i(kend), .period_i(period),
                       .run_o(run), .win_end_o(win_end), .last_o(last), .ts_o(ts));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One kernel of `len` running cycles with window period `p`.
  task automatic run_kernel(input int unsigned p, input int unsigned len);
    int unsigned nwin = 0;
    @(negedge clk); period = p; start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int unsigned c = 1; c <= len; c++) begin
      kend = (c == len);
      #1;
      begin
        bit exp_end = ((p != 0) && (c % p == 0)) || (c == len);
        check(run == 1'b1, "running during kernel");
        check(win_end == exp_end, $sformatf("p=%0d cycle %0d win_end=%0d", p, c, win_end));
        check(last == (c == len), "last only at kernel end");
        if (exp_end) begin
          check(ts == c, $sformatf("ts %0d exp %0d", ts, c));
          nwin++;
        end
      end
      @(negedge clk);
    end
    kend = 1'b0;
    #1;
    check(run == 1'b0 && win_end == 1'b0, "stopped after kernel end");
    check(nwin == ((p == 0) ? 1 : (len + p - 1) / p), "window count");
    repeat (3) @(negedge clk);
  endtask

  initial begin
    start = 1'b0; kend = 1'b0; period = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); #1;
    check(run == 1'b0 && win_end == 1'b0, "idle after reset");
    run_kernel(10, 47);   // period windows and a short final window
    run_kernel(10, 50);   // kernel end on a period boundary: one entry
    run_kernel(0, 33);    // kernel-end only
    run_kernel(1, 5);     // one-cycle windows
    run_kernel(7, 3);     // kernel shorter than a window
    for (int k = 0; k < 10; k++) run_kernel($urandom_range(0, 20), $urandom_range(1, 80));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
