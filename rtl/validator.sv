// validator -- the on-chip ShadowScope+ Validator.
//
// It sits on the GPU interconnect next to the SMs and memory partitions.
// Following the paper: when the kernel dispatcher launches a kernel it tells
// the Validator which SMs run it; the Validator starts loading the kernel's
// golden model from device memory into its fetch buffer (val_fetch_buffer),
// sums the per-window PMU packets of all active SMs in its aggregation cache
// (val_aggr_cache), and compares each completed window with the next golden
// entry (val_compare: |agg - golden| per metric against one threshold). If a
// window deviates, it tells the dispatcher to stop the kernel (`stop_o`) and
// raises an alarm toward the CPU/driver with the offending kernel's id;
// otherwise it goes on with the next window.
//
// This design's additions where the paper is silent: windows are matched to
// golden entries by order (the i-th completed window against the i-th golden
// entry; ts is used only as the cache tag); a kernel that ends with fewer
// windows than its golden model, or produces a window when the golden model
// is used up, fails with reason FAIL_WINDOWS (this is how a skipped or an
// extra phase shows up); a kernel whose final window matches and whose window
// count matches is reported with `pass_o`. After a verdict, packets of the
// finished kernel are drained and dropped. Launches are ignored while the
// enable register is 0 (profiling mode).
//
// Registers (ssp_pkg::val_reg_e): VREG_THRESH, VREG_ENABLE.
// Timing: a completed window is compared in the cycle both it and its golden
// entry are present; `stop_o` and `pass_o` are one-cycle pulses in the next
// cycle; `alarm_o` stays high until the next launch.
module validator
  import ssp_pkg::*;
#(
  parameter int unsigned CACHE_ENTRIES = 4,
  parameter int unsigned FETCH_DEPTH   = 4,
  localparam int unsigned DW           = TS_W + NUM_CNTR*CNTR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // register writes
  input  logic             cfg_we_i,
  input  logic [3:0]       cfg_addr_i,
  input  logic [31:0]      cfg_wdata_i,
  // kernel dispatcher
  input  logic             launch_i,
  input  logic [KID_W-1:0] launch_kid_i,
  input  logic [ACT_W-1:0] launch_active_i,  // number of active SMs/PMUs
  input  addr_t            launch_gbase_i,   // golden model base address
  input  logic [15:0]      launch_glen_i,    // golden model entries
  output logic             stop_o,           // stop the offending kernel
  // PMU packets from the ICNT
  input  logic             pkt_valid_i,
  output logic             pkt_ready_o,
  input  sample_t          pkt_data_i,
  // device memory read port (golden model)
  output logic             rd_req_valid_o,
  input  logic             rd_req_ready_i,
  output addr_t            rd_req_addr_o,
  input  logic             rd_resp_valid_i,
  input  logic [DW-1:0]    rd_resp_data_i,
  // report to the CPU / driver
  output logic             alarm_o,
  output logic [KID_W-1:0] alarm_kid_o,
  output fail_e            alarm_reason_o,
  output logic [NUM_CNTR-1:0] alarm_metrics_o,
  output logic             pass_o,
  output logic [15:0]      windows_ok_o,
  output logic             busy_o,
  output logic             vstart_o,         // a validated kernel starts now
  output logic             cache_stall_o
);

  typedef enum logic [1:0] {V_IDLE, V_RUN, V_PASS, V_FAIL} vstate_e;
  vstate_e state;

  cntr_t            thresh;
  logic             enable;
  logic [KID_W-1:0] kid;
  logic [15:0]      glen, nwin;
  logic             start;

  assign start  = launch_i && enable;
  assign busy_o   = (state == V_RUN);
  assign vstart_o = start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thresh <= '0;
      enable <= 1'b0;
    end else if (cfg_we_i) begin
      case (cfg_addr_i)
        VREG_THRESH: thresh <= cfg_wdata_i;
        VREG_ENABLE: enable <= cfg_wdata_i[0];
        default: ;
      endcase
    end
  end

  // ---------------- aggregation ----------------
  logic    agg_valid, agg_ready;
  sample_t agg;
  logic [ACT_W-1:0] nact;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     nact <= '0;
    else if (start) nact <= launch_active_i;
  end

  val_aggr_cache #(.ENTRIES(CACHE_ENTRIES)) u_cache (
    .clk, .rst_n, .clear_i(start), .num_active_i(nact),
    .in_valid_i(pkt_valid_i), .in_ready_o(pkt_ready_o), .in_data_i(pkt_data_i),
    .out_valid_o(agg_valid), .out_ready_i(agg_ready), .out_data_o(agg),
    .stall_o(cache_stall_o), .used_o()
  );

  // ---------------- golden model ----------------
  logic    gold_valid, gold_ready, gold_exhausted;
  sample_t gold;

  val_fetch_buffer #(.DEPTH(FETCH_DEPTH)) u_fetch (
    .clk, .rst_n, .start_i(start), .base_i(launch_gbase_i), .len_i(launch_glen_i),
    .rd_req_valid_o, .rd_req_ready_i, .rd_req_addr_o, .rd_resp_valid_i, .rd_resp_data_i,
    .out_valid_o(gold_valid), .out_ready_i(gold_ready), .out_data_o(gold),
    .exhausted_o(gold_exhausted)
  );

  // ---------------- compare ----------------
  cntr_t [NUM_CNTR-1:0] distance;
  logic  [NUM_CNTR-1:0] over;
  logic                 dev_fail;

  val_compare u_cmp (
    .agg_i(agg.cntr), .gold_i(gold.cntr), .thresh_i(thresh),
    .dist_o(distance), .over_o(over), .fail_o(dev_fail)
  );

  logic do_cmp, extra_win;
  assign do_cmp    = (state == V_RUN) && agg_valid && gold_valid;
  assign extra_win = (state == V_RUN) && agg_valid && !gold_valid &&
                     (nwin >= glen) && gold_exhausted;
  assign agg_ready  = (state != V_RUN) || do_cmp || extra_win;
  assign gold_ready = do_cmp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= V_IDLE;
      kid             <= '0;
      glen            <= '0;
      nwin            <= '0;
      stop_o          <= 1'b0;
      pass_o          <= 1'b0;
      alarm_o         <= 1'b0;
      alarm_kid_o     <= '0;
      alarm_reason_o  <= FAIL_NONE;
      alarm_metrics_o <= '0;
      windows_ok_o    <= '0;
    end else begin
      stop_o <= 1'b0;
      pass_o <= 1'b0;
      if (start) begin
        state           <= V_RUN;
        kid             <= launch_kid_i;
        glen            <= launch_glen_i;
        nwin            <= '0;
        alarm_o         <= 1'b0;
        alarm_reason_o  <= FAIL_NONE;
        alarm_metrics_o <= '0;
        windows_ok_o    <= '0;
      end else if (do_cmp) begin
        nwin <= nwin + 1'b1;
        if (dev_fail) begin
          state           <= V_FAIL;
          stop_o          <= 1'b1;
          alarm_o         <= 1'b1;
          alarm_kid_o     <= kid;
          alarm_reason_o  <= FAIL_DEVIATION;
          alarm_metrics_o <= over;
        end else begin
          windows_ok_o <= windows_ok_o + 1'b1;
          if (agg.last) begin
            if (nwin + 1'b1 == glen) begin
              state  <= V_PASS;
              pass_o <= 1'b1;
            end else begin
              // kernel ended before its golden model did: a phase is missing
              state          <= V_FAIL;
              stop_o         <= 1'b1;
              alarm_o        <= 1'b1;
              alarm_kid_o    <= kid;
              alarm_reason_o <= FAIL_WINDOWS;
            end
          end
        end
      end else if (extra_win) begin
        // more windows than the golden model holds
        state          <= V_FAIL;
        stop_o         <= 1'b1;
        alarm_o        <= 1'b1;
        alarm_kid_o    <= kid;
        alarm_reason_o <= FAIL_WINDOWS;
      end
    end
  end

  a_cmp_needs_both: assert property (@(posedge clk) disable iff (!rst_n)
    gold_ready |-> (agg_valid && gold_valid));

endmodule
