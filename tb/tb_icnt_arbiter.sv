// tb_icnt_arbiter -- self-checking test of the round-robin ICNT path.
// Fifteen sources each send numbered packets with random valid; the sink
// stalls at random. Checks that every packet arrives once, in order per
// source, with the right source index; that with all sources busy the
// grants rotate (no source waits more than N-1 packets); and the one-packet-
// per-cycle throughput with an always-ready sink.
module tb_icnt_arbiter;
  localparam int N = 15, W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]        ivalid, iready;
  logic [N-1:0][W-1:0] idata;
  logic                ovalid, oready, flush = 1'b0;
  logic [W-1:0]        odata;
  logic [3:0]          osrc;
  int checks = 0, failures = 0;
  int unsigned next_tx [N], next_rx [N], since [N];
  int unsigned received = 0;
  logic [N-1:0] fired = '0;   // handshake at the last clock edge

  icnt_arbiter #(.N(N), .W(W)) dut (.clk, .rst_n, .flush_i(flush), .in_valid_i(ivalid), .in_ready_o(iready),
    .in_data_i(idata), .out_valid_o(ovalid), .out_ready_i(oready), .out_data_o(odata), .out_src_o(osrc));

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

  always @(posedge clk) if (rst_n) begin
    if (ovalid && oready) begin
      check(odata[31:16] == 16'(osrc), "source index matches payload");
      check(odata[15:0] == 16'(next_rx[osrc]), $sformatf("src %0d seq %0d exp %0d", osrc, odata[15:0], next_rx[osrc]));
      next_rx[osrc]++;
      received++;
    end
    fired <= ivalid & iready;
    for (int s = 0; s < N; s++) begin
      if (ivalid[s] && iready[s]) begin next_tx[s] <= next_tx[s] + 1; since[s] = 0; end
      else if (ivalid[s]) begin
        since[s]++;
        check(since[s] <= 4 * N, $sformatf("no source starves: src %0d waited %0d at %0t", s, since[s], $time));
      end
    end
  end

  always_comb for (int s = 0; s < N; s++) idata[s] = {16'(s), 16'(next_tx[s])};

  initial begin
    int unsigned t0, got0;
    ivalid = '0; oready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      oready = ($urandom % 4) != 0;
      for (int s = 0; s < N; s++) if (!ivalid[s] || fired[s]) ivalid[s] = ($urandom % 3) == 0;
    end
    // saturation: all sources valid, sink always ready -> one packet per cycle, fair
    @(negedge clk); ivalid = '1; oready = 1'b1;
    repeat (2) @(negedge clk);
    got0 = received;
    for (int s = 0; s < N; s++) since[s] = 0;
    begin
      int unsigned prev_rx [N];
      for (int s = 0; s < N; s++) prev_rx[s] = next_rx[s];
      repeat (10 * N) @(negedge clk);
      check(received - got0 == 10 * N, $sformatf("throughput %0d packets in %0d cycles", received - got0, 10 * N));
      for (int s = 0; s < N; s++) check(next_rx[s] - prev_rx[s] == 10, "equal share under saturation");
    end
    @(negedge clk); ivalid = '0;
    repeat (5) @(negedge clk);
    for (int s = 0; s < N; s++) check(next_rx[s] == next_tx[s] && next_tx[s] > 50, "all packets delivered");
    // flush drops the held packet
    @(negedge clk); oready = 1'b0; ivalid = '0; ivalid[3] = 1'b1;
    @(negedge clk); ivalid = '0; #1;
    check(ovalid && osrc == 3, "packet held at the output");
    flush = 1'b1;
    @(negedge clk); flush = 1'b0; #1;
    check(!ovalid, "flush drops the held packet");
    next_tx[3] = next_tx[3] - 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
