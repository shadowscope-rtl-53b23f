// sm_pmu -- the local performance monitoring unit of one SM.
//
// Following the paper: the SM's one-bit event signals go to NUM_CNTR
// configurable 8-to-1 selectors, each driving its own 32-bit up-counter
// (pmu_counter). A 32-bit cycle counter (pmu_window_ctrl) closes a sampling
// window after a firmware-set number of cycles or at kernel end; the PMU then
// freezes the counters, stores {ts, cntr1..cntr8} in its output buffer
// (pmu_out_buffer) and restarts the counters at zero. In profiling mode the
// DMA engine (pmu_dma) copies the entries to a ring buffer in device memory;
// in validation mode they leave as packets over the interconnect toward the
// Validator.
//
// Firmware registers (ssp_pkg::pmu_reg_e) are written through a simple
// one-cycle write port; the register map and the write port are this
// design's choices. Event inputs are grouped per counter: counter c selects
// among events_i[c][0..7], so each selector has its own eight signals, as
// drawn in Fig. 11 where each selector is fed by its own set of wires (which
// SM signal goes to which input is left to the integrator).
//
// When a validated kernel is launched (`vlaunch_i`, broadcast to all SMs)
// a PMU in validation mode discards what its buffer still holds of an
// earlier kernel, since the Validator restarts its aggregation at that
// moment (own choice; the paper validates one kernel at a time).
//
// Timing: an event in cycle t is in the window that closes at or after t;
// the entry reaches the buffer head at t+1 after the window end.
module sm_pmu
  import ssp_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // SM event signals, per counter
  input  logic [NUM_CNTR-1:0][EVENTS_PER_MUX-1:0] events_i,
  // kernel dispatcher
  input  logic        kstart_i,
  input  logic        kend_i,
  input  logic        vlaunch_i,   // a validated kernel is launched somewhere
  // firmware register writes
  input  logic        cfg_we_i,
  input  logic [3:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i,
  // packets to the Validator over the ICNT
  output logic        pkt_valid_o,
  input  logic        pkt_ready_i,
  output sample_t     pkt_data_o,
  // DMA memory writes
  output logic        mem_wr_valid_o,
  input  logic        mem_wr_ready_i,
  output addr_t       mem_wr_addr_o,
  output logic [TS_W+NUM_CNTR*CNTR_W-1:0] mem_wr_data_o,
  // status
  output logic        running_o,
  output logic        validate_o,
  output logic [15:0] drops_o,
  output logic [15:0] ring_idx_o,
  output logic [15:0] ring_wraps_o
);

  // ---------------- firmware registers ----------------
  logic [NUM_CNTR-1:0][SEL_W-1:0] evsel;
  ts_t         period;
  logic        validate;
  addr_t       ring_base;
  logic [15:0] ring_size;
  logic        ring_reset;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      evsel     <= '0;
      period    <= '0;
      validate  <= 1'b0;
      ring_base <= '0;
      ring_size <= 16'd1;
    end else if (cfg_we_i) begin
      if (cfg_addr_i < 4'(NUM_CNTR)) evsel[cfg_addr_i[2:0]] <= cfg_wdata_i[SEL_W-1:0];
      case (cfg_addr_i)
        REG_PERIOD:   period    <= cfg_wdata_i;
        REG_MODE:     validate  <= cfg_wdata_i[0];
        REG_RINGBASE: ring_base <= cfg_wdata_i;
        REG_RINGSIZE: ring_size <= cfg_wdata_i[15:0];
        default: ;
      endcase
    end
  end
  assign ring_reset = cfg_we_i && (cfg_addr_i == REG_RINGBASE);
  assign validate_o = validate;

  // ---------------- window control and counters ----------------
  logic run, win_end, last;
  ts_t  ts;

  pmu_window_ctrl #(.TS_W(TS_W)) u_win (
    .clk, .rst_n,
    .start_i(kstart_i), .end_i(kend_i), .period_i(period),
    .run_o(run), .win_end_o(win_end), .last_o(last), .ts_o(ts)
  );
  assign running_o = run;

  cntr_t [NUM_CNTR-1:0] snap;
  for (genvar c = 0; c < NUM_CNTR; c++) begin : g_cntr
    pmu_counter #(.EVENTS_PER_MUX(EVENTS_PER_MUX), .CNTR_W(CNTR_W)) u_cntr (
      .clk, .rst_n,
      .events_i(events_i[c]), .sel_i(evsel[c]),
      .en_i(run), .clear_i(win_end || kstart_i),
      .count_o(), .snap_o(snap[c])
    );
  end

  // ---------------- output buffer ----------------
  sample_t entry, head;
  logic    head_valid, head_ready;
  assign entry = '{last: last, ts: ts, cntr: snap};

  pmu_out_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .flush_i(vlaunch_i && validate), .push_i(win_end), .push_data_i(entry),
    .out_valid_o(head_valid), .out_ready_i(head_ready), .out_data_o(head),
    .count_o(), .drops_o(drops_o)
  );

  // ---------------- routing: Validator (validation) or DMA (profiling) ----
  logic dma_ready;
  assign pkt_valid_o = head_valid && validate;
  assign pkt_data_o  = head;
  assign head_ready  = validate ? pkt_ready_i : dma_ready;

  pmu_dma u_dma (
    .clk, .rst_n,
    .ring_base_i(ring_base), .ring_size_i(ring_size), .ring_reset_i(ring_reset),
    .in_valid_i(head_valid && !validate), .in_ready_o(dma_ready), .in_data_i(head),
    .wr_valid_o(mem_wr_valid_o), .wr_ready_i(mem_wr_ready_i),
    .wr_addr_o(mem_wr_addr_o), .wr_data_o(mem_wr_data_o),
    .wr_idx_o(ring_idx_o), .wraps_o(ring_wraps_o)
  );

endmodule
