// tb_pmu_out_buffer -- self-checking test of the PMU output buffer.
// Random pushes and a randomly stalling consumer; a queue in the testbench
// is the reference. Checks FIFO order, the entry count, the eight-entry
// capacity and the drop counter when a window closes on a full buffer.
module tb_pmu_out_buffer;
  import ssp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    push, ovalid, oready, flush;
  sample_t pdata, odata;
  logic [3:0]  count;
  logic [15:0] drops;
  int checks = 0, failures = 0;
  sample_t q[$];
  int unsigned exp_drops = 0, max_count = 0;

  pmu_out_buffer #(.DEPTH(8)) dut (.clk, .rst_n, .flush_i(flush), .push_i(push), .push_data_i(pdata),
    .out_valid_o(ovalid), .out_ready_i(oready), .out_data_o(odata), .count_o(count), .drops_o(drops));

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

  function automatic sample_t rnd_sample();
    sample_t s;
    s.last = 1'($urandom);
    s.ts = $urandom;
    for (int m = 0; m < NUM_CNTR; m++) s.cntr[m] = $urandom;
    return s;
  endfunction

  initial begin
    push = 1'b0; oready = 1'b0; pdata = '0; flush = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // phases: fill (consumer slow), drain (consumer fast)
      push   = ((i / 300) % 2 == 0) ? ($urandom % 2 == 0) : ($urandom % 5 == 0);
      oready = ((i / 300) % 2 == 0) ? ($urandom % 6 == 0) : ($urandom % 2 == 0);
      pdata  = rnd_sample();
      #1;
      check(count == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      check(ovalid == (q.size() != 0), "valid matches occupancy");
      if (ovalid) check(odata == q[0], "head entry in order");
      if (count > max_count) max_count = count;
      @(posedge clk);
      begin
        bit popped;
        popped = ovalid && oready;
        if (popped) void'(q.pop_front());
        if (push) begin
          if (q.size() < 8) q.push_back(pdata);
          else exp_drops++;
        end
      end
    end
    #1;
    check(drops == exp_drops, $sformatf("drops %0d exp %0d", drops, exp_drops));
    check(exp_drops > 0, "buffer overflow exercised");
    check(max_count == 8, "buffer filled to eight entries");
    // flush empties the buffer
    @(negedge clk); push = 1'b1; oready = 1'b0;
    @(negedge clk); push = 1'b0; flush = 1'b1;
    @(negedge clk); flush = 1'b0; #1;
    check(count == 0 && !ovalid, "flush empties the buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
