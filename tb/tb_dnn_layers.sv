// tb_dnn_layers -- layer-by-layer validation of a neural-network inference
// on the full-size design (15 SMs, default parameters).
//
// A network is run as one kernel per layer, as a DNN framework does. Two
// networks are modelled: a 10-layer one shaped like AlexNet (all 15 SMs) and
// an 8-layer one shaped like CifarNet (12 SMs). Each layer has its own event
// profile (density of each counter's event) and length (3 to 5 sampling
// windows of 128 cycles). The host keeps one golden model per layer in device
// memory; this testbench computes it directly from the event generator (sum
// over the active SMs of the expected counts of a trusted run with its own
// seed), without using the design.
//
// For each network:
//   - benign inference: every layer is launched with its golden model and
//     must pass with all its windows matched;
//   - mind-control attack: the second layer (index 1) is skipped, so the
//     kernel that runs in its place is the third layer's. The Validator,
//     holding the second layer's golden model, must stop it and report
//     kernel id 1 (layer index) before the inference goes on; the first
//     layer must have passed.
// Layers are numbered from 0; a layer's kernel id is its index.
// Timing checked: every verdict arrives within 100 cycles of the layer's end.
module tb_dnn_layers;
  import ssp_pkg::*;
  localparam int NSM = 15, P = 128;
  localparam addr_t GBASE = 32'h0040_0000;
  localparam int TH = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NSM-1:0][NUM_CNTR-1:0][EVENTS_PER_MUX-1:0] ev;
  logic             launch, kend, stop, cfg_we;
  logic [7:0]       kid, cfg_target;
  logic [NSM-1:0]   mask;
  logic [15:0]      glen;
  addr_t            gbase;
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
    .launch_i(launch), .launch_kid_i(kid), .launch_mask_i(mask), .launch_gbase_i(gbase),
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
  int unsigned n_layers_passed = 0, n_attacks_caught = 0;

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

  // Event density (out of 256) of counter c in layer l, and layer length.
  function automatic int unsigned density(input int l, input int c);
    return 20 + ((l * 71 + c * 29 + l * c * 13) % 216);
  endfunction
  function automatic int nwin(input int l);
    return 3 + (l % 3);
  endfunction

  function automatic bit event_on(input int unsigned seed, input int l, input int s,
                                  input int c, input int cyc);
    return (hash(seed + 977 * l, s, c, cyc) & 255) < density(l, c);
  endfunction

  task automatic cfg(input int t, input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1'b1; cfg_target = 8'(t); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 1'b0;
  endtask

  // Golden model of layer l: per-window sums over the active SMs, from a
  // trusted run with seed `gseed`, written at GBASE + l*0x1000.
  task automatic make_golden(input int l, input int unsigned gseed);
    for (int w = 0; w < nwin(l); w++) begin
      logic [287:0] g;
      g = '0;
      g[287:256] = (w + 1) * P;
      for (int c = 0; c < NUM_CNTR; c++) begin
        int unsigned sum;
        sum = 0;
        for (int s = 0; s < NSM; s++) if (mask[s])
          for (int cyc = w * P + 1; cyc <= (w + 1) * P; cyc++) sum += event_on(gseed, l, s, c, cyc);
        g[c*32 +: 32] = sum;
      end
      mem.poke(GBASE + l * 32'h1000 + w * 36, g);
    end
  endtask

  // Runs the kernel of layer `body` while the Validator holds the golden
  // model of layer `slot`. Returns whether the dispatcher was told to stop
  // it, and the cycles from its end to the verdict.
  task automatic run_layer(input int slot, input int body, input int unsigned seed,
                           output bit stopped, output bit passed, output int lat);
    int len, cyc;
    len = nwin(body) * P;
    stopped = 0;
    gbase = GBASE + slot * 32'h1000; glen = 16'(nwin(slot)); kid = 8'(slot);
    @(negedge clk); launch = 1'b1;
    @(negedge clk); launch = 1'b0;
    for (cyc = 1; cyc <= len; cyc++) begin
      for (int s = 0; s < NSM; s++) for (int c = 0; c < NUM_CNTR; c++)
        for (int e = 0; e < EVENTS_PER_MUX; e++)
          ev[s][c][e] = (e == c) ? event_on(seed, body, s, c, cyc) : hash(seed + 1, s, c * 8 + e, cyc)[0];
      kend = (cyc == len) || stop;
      if (kend) begin
        if (stop) stopped = 1;
        @(negedge clk);
        break;
      end
      @(negedge clk);
    end
    kend = 1'b0; ev = '0;
    lat = 0;
    while (!pass && !alarm && lat < 500) begin
      if (stop) stopped = 1;
      @(negedge clk); lat++;
    end
    passed = pass;
    while (vbusy) @(negedge clk);
  endtask

  task automatic run_network(input string name, input int layers, input logic [NSM-1:0] m,
                             input int unsigned gseed);
    bit stopped, passed;
    int lat, l;
    mask = m;
    for (l = 0; l < layers; l++) make_golden(l, gseed);
    // benign inference
    for (l = 0; l < layers; l++) begin
      run_layer(l, l, gseed + 1000 + l, stopped, passed, lat);
      check(passed && !alarm && !stopped, $sformatf("%s layer %0d validated", name, l));
      check(wok == 16'(nwin(l)), $sformatf("%s layer %0d: %0d windows matched (%0d)", name, l, nwin(l), wok));
      check(lat < 100, $sformatf("%s layer %0d verdict %0d cycles after its end", name, l, lat));
      if (passed) n_layers_passed++;
    end
    // attack: layer 1 skipped, the network goes on with layer 2
    run_layer(0, 0, gseed + 2000, stopped, passed, lat);
    check(passed && !alarm, $sformatf("%s attack run: first layer passes", name));
    run_layer(1, 2, gseed + 2001, stopped, passed, lat);
    check(alarm && alarm_kid == 8'd1, $sformatf("%s: skipped layer detected at layer 1 (kid %0d)", name, alarm_kid));
    check(stopped && running == '0, $sformatf("%s: kernel stopped", name));
    check(lat < 100, $sformatf("%s: alarm %0d cycles after the kernel end", name, lat));
    $display("%s: reason %s, over-threshold metrics %b", name, reason.name(), mflags);
    if (alarm) n_attacks_caught++;
  endtask

  initial begin
    ev = '0; launch = 0; kend = 0; kid = 0; cfg_we = 0; cfg_target = 0; cfg_addr = 0; cfg_wdata = 0;
    mask = '1; glen = 0; gbase = GBASE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NUM_CNTR; c++) cfg(NSM, 4'(c), c);
    cfg(NSM, REG_PERIOD, P);
    cfg(NSM, REG_MODE, 1);
    cfg(NSM + 1, VREG_THRESH, TH);
    cfg(NSM + 1, VREG_ENABLE, 1);

    run_network("alexnet-like", 10, 15'h7FFF, 100);
    run_network("cifarnet-like", 8, 15'h0FFF, 200);

    $display("layers validated %0d, attacks caught %0d", n_layers_passed, n_attacks_caught);
    check(n_layers_passed == 18, "all benign layers validated");
    check(n_attacks_caught == 2, "both skipped-layer attacks caught");
    check(dropped == '0, "no PMU window lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
