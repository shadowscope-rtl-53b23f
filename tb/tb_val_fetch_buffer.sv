// tb_val_fetch_buffer -- self-checking test of the golden-model fetch buffer.
// A golden model of L entries is placed in the device-memory model; the
// consumer takes entries at random. Checks entry order and contents, the
// read addresses (base + i*36, one read per entry), that no more than four
// entries are ever held, exhaustion, and a restart in the middle of a model
// (stale answers discarded).
module tb_val_fetch_buffer;
  import ssp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, rqv, rqr, rsv, ovalid, oready, exh;
  addr_t        base, rqa;
  logic [15:0]  len;
  logic [287:0] rsd;
  sample_t      odata;
  int checks = 0, failures = 0;
  int unsigned taken = 0, max_held = 0;
  int held = 0;
  bit pend = 0, stale = 0;

  val_fetch_buffer dut (.clk, .rst_n, .start_i(start), .base_i(base), .len_i(len),
    .rd_req_valid_o(rqv), .rd_req_ready_i(rqr), .rd_req_addr_o(rqa),
    .rd_resp_valid_i(rsv), .rd_resp_data_i(rsd),
    .out_valid_o(ovalid), .out_ready_i(oready), .out_data_o(odata), .exhausted_o(exh));

  dev_mem_model mem (.clk, .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0),
    .rd_req_valid(rqv && rst_n), .rd_req_ready(rqr), .rd_req_addr(rqa), .rd_resp_valid(rsv), .rd_resp_data(rsd));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [287:0] gentry(input addr_t b, input int i);
    logic [287:0] e;
    e[287:256] = b + i;
    for (int m = 0; m < 8; m++) e[m*32 +: 32] = b ^ (i * 8 + m);
    return e;
  endfunction

  // one request in flight, and the fill level never passes four
  always @(posedge clk) if (rst_n) begin
    if (rqv && rqr) begin
      check(rqa == base + (mem.reads) * 36, $sformatf("read address %h", rqa));
    end
    if (!start) check(ovalid == (held > 0), "valid matches the fill level");
    // reference fill level: answers to requests issued since the last start
    if (start) begin
      held = 0; stale = pend;
    end else begin
      if (rsv) begin
        if (!stale) held++;
        stale = 0; pend = 0;
      end
      if (rqv && rqr) pend = 1;
      if (ovalid && oready) held--;
    end
    if (held > max_held) max_held = held;
    check(held <= 4, "at most four entries held");

  end

  task automatic run_model(input addr_t b, input int l, input int stop_after);
    @(negedge clk);
    base = b; len = 16'(l); start = 1'b1;
    mem.reads = 0;
    @(negedge clk); start = 1'b0;
    taken = 0;
    repeat (60) @(negedge clk);   // let the buffer fill before consuming
    while (taken < l && taken < stop_after) begin
      oready = ($urandom % 3) == 0;
      @(posedge clk);
      if (ovalid && oready) begin
        logic [287:0] e;
        e = gentry(b, taken);
        check({odata.ts, odata.cntr} == e, $sformatf("golden entry %0d", taken));
        taken++;
      end
      @(negedge clk);
    end
    oready = 1'b0;
  endtask

  initial begin
    start = 1'b0; base = '0; len = '0; oready = 1'b0;
    for (int i = 0; i < 40; i++) begin
      mem.poke(32'h4000 + i * 36, gentry(32'h4000, i));
      mem.poke(32'h8000 + i * 36, gentry(32'h8000, i));
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_model(32'h4000, 30, 1000);
    repeat (20) @(negedge clk);
    check(exh && !ovalid && !rqv, "model exhausted, no further reads");
    check(mem.reads == 30, $sformatf("one read per entry (%0d)", mem.reads));
    check(max_held == 4, "buffer filled to four entries");
    // restart in the middle of a model
    run_model(32'h4000, 30, 5);
    run_model(32'h8000, 12, 1000);
    repeat (20) @(negedge clk);
    check(exh && !ovalid, "second model exhausted");
    // empty model
    run_model(32'h8000, 0, 1000);
    #1 check(exh && !rqv, "empty model is exhausted at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
