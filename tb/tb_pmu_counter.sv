// tb_pmu_counter -- self-checking test of one event selector + counter.
// Drives random event vectors, selects, enables and window clears, and
// checks the registered count and the window snapshot every cycle against a
// reference count kept in the testbench.
module tb_pmu_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  ev;
  logic [2:0]  sel;
  logic        en, clr;
  logic [31:0] count, snap;
  int checks = 0, failures = 0;
  int unsigned ref_cnt = 0;
  int unsigned hits [8];

  pmu_counter dut (.clk, .rst_n, .events_i(ev), .sel_i(sel), .en_i(en), .clear_i(clr),
                   .count_o(count), .snap_o(snap));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev = '0; sel = '0; en = 1'b0; clr = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      ev  = 8'($urandom);
      sel = 3'($urandom);
      en  = ($urandom % 8) != 0;
      clr = ($urandom % 50) == 0;
      #1;
      begin
        int unsigned inc;
        inc = (en && ev[sel]) ? 1 : 0;
        if (inc) hits[sel]++;
        check(count == ref_cnt, $sformatf("count %0d exp %0d", count, ref_cnt));
        check(snap == ref_cnt + inc, $sformatf("snap %0d exp %0d", snap, ref_cnt + inc));
        ref_cnt = clr ? 0 : ref_cnt + inc;
      end
    end
    // a long window without clears: counts every asserted cycle
    @(negedge clk); clr = 1'b1; ev = '1; en = 1'b1; sel = 3'd5;
    @(negedge clk); clr = 1'b0;
    repeat (100) @(negedge clk);
    check(count == 100, $sformatf("constant event: count %0d exp 100", count));
    for (int s = 0; s < 8; s++) check(hits[s] > 0, "every select input exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
