// tb_pmu_dma -- self-checking test of the PMU's profiling DMA engine.
// Feeds entries, lets a memory model with random wait states take the
// writes, and checks every write address (base + idx*36, wrapping at the
// ring size), the stored data, the wrap counter and a ring restart.
module tb_pmu_dma;
  import ssp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  addr_t       base;
  logic [15:0] size, idx, wraps;
  logic        rreset, ivalid, iready, wvalid, wready;
  sample_t     idata;
  addr_t       waddr;
  logic [287:0] wdata;
  int checks = 0, failures = 0;
  sample_t sent[$];
  int unsigned nwr = 0;

  pmu_dma dut (.clk, .rst_n, .ring_base_i(base), .ring_size_i(size), .ring_reset_i(rreset),
    .in_valid_i(ivalid), .in_ready_o(iready), .in_data_i(idata),
    .wr_valid_o(wvalid), .wr_ready_i(wready), .wr_addr_o(waddr), .wr_data_o(wdata),
    .wr_idx_o(idx), .wraps_o(wraps));

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

  // memory side: random ready, check each write as it is taken
  always @(posedge clk) begin
    if (rst_n && wvalid && wready && !rreset) begin
      sample_t e;
      e = sent.pop_front();
      check(waddr == base + (nwr % size) * 36, $sformatf("addr %h exp %h", waddr, base + (nwr % size) * 36));
      check(wdata == {e.ts, e.cntr}, "write data = {ts, counters}");
      nwr++;
    end
  end

  initial begin
    base = 32'h1000_0000; size = 16'd5; rreset = 1'b0; ivalid = 1'b0; idata = '0; wready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      wready = ($urandom % 3) != 0;
      if (!ivalid || iready) ;
      ivalid = ($urandom % 2) == 0;
      idata.last = 1'($urandom); idata.ts = $urandom;
      for (int m = 0; m < 8; m++) idata.cntr[m] = $urandom;
      @(posedge clk);
      if (ivalid && iready) sent.push_back(idata);
    end
    @(negedge clk); ivalid = 1'b0; wready = 1'b1;
    repeat (4) @(negedge clk);
    check(sent.size() == 0, "every entry written");
    check(nwr > 100, "many writes");
    check(wraps == nwr / 5 && idx == nwr % 5, $sformatf("wraps %0d idx %0d after %0d writes", wraps, idx, nwr));
    // restart the ring at a new base
    base = 32'h2000_0000; rreset = 1'b1;
    @(negedge clk); rreset = 1'b0; nwr = 0;
    check(idx == 0 && wraps == 0, "ring restart");
    ivalid = 1'b1; idata = '0; idata.ts = 32'd77;
    @(posedge clk); sent.push_back(idata);
    @(negedge clk); ivalid = 1'b0;
    repeat (4) @(negedge clk);
    check(nwr == 1 && idx == 1, "first write after restart at new base");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
