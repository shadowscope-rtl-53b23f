// shadowscope_top -- ShadowScope+: in-GPU kernel monitoring and validation.
//
// NUM_SM streaming multiprocessors each carry a local PMU (sm_pmu) that
// counts eight selected one-bit events per sampling window. In validation
// mode the PMUs send one packet per window over the interconnect
// (icnt_arbiter, N = NUM_SM) to the Validator (validator), which sums the
// packets of all active SMs per window, compares the sums with the kernel's
// golden model read from device memory, and stops the kernel and raises an
// alarm on a deviation. In profiling mode the PMUs' DMA engines write their
// entries through a second interconnect path to ring buffers in device
// memory. This is the structure of the paper's Fig. 11.
//
// The SMs, the kernel dispatcher, the L2/memory partitions and device memory
// are outside this design; their signals are the ports:
//   sm_events_i      one-bit event signals of every SM, grouped per counter
//   launch_*, kend_i kernel dispatcher: launch (with active-SM mask, kernel
//                    id, golden model address and length) and kernel end,
//                    broadcast to all SMs in the same cycle; stop_o asks
//                    the dispatcher to halt the kernel
//   cfg_*            firmware register writes; cfg_target_i selects one PMU
//                    (0..NUM_SM-1), all PMUs (NUM_SM) or the Validator
//                    (NUM_SM+1)
//   mem_wr_*         DMA writes to device memory (one 36-byte entry per beat)
//   mem_rd_*         golden-model reads (one entry per request, in order)
//   alarm_*, pass_o  report toward the CPU/driver
// The port grouping and the configuration addressing are this design's own.
module shadowscope_top
  import ssp_pkg::*;
#(
  parameter int unsigned NUM_SM        = 15,
  parameter int unsigned PMU_BUF_DEPTH = 8,
  parameter int unsigned CACHE_ENTRIES = 4,
  parameter int unsigned FETCH_DEPTH   = 4,
  localparam int unsigned DW           = TS_W + NUM_CNTR*CNTR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NUM_SM-1:0][NUM_CNTR-1:0][EVENTS_PER_MUX-1:0] sm_events_i,
  // kernel dispatcher
  input  logic             launch_i,
  input  logic [KID_W-1:0] launch_kid_i,
  input  logic [NUM_SM-1:0] launch_mask_i,
  input  addr_t            launch_gbase_i,
  input  logic [15:0]      launch_glen_i,
  input  logic             kend_i,
  output logic             stop_o,
  // firmware registers
  input  logic             cfg_we_i,
  input  logic [7:0]       cfg_target_i,
  input  logic [3:0]       cfg_addr_i,
  input  logic [31:0]      cfg_wdata_i,
  // device memory
  output logic             mem_wr_valid_o,
  input  logic             mem_wr_ready_i,
  output addr_t            mem_wr_addr_o,
  output logic [DW-1:0]    mem_wr_data_o,
  output logic             mem_rd_req_valid_o,
  input  logic             mem_rd_req_ready_i,
  output addr_t            mem_rd_req_addr_o,
  input  logic             mem_rd_resp_valid_i,
  input  logic [DW-1:0]    mem_rd_resp_data_i,
  // report
  output logic             alarm_o,
  output logic [KID_W-1:0] alarm_kid_o,
  output fail_e            alarm_reason_o,
  output logic [NUM_CNTR-1:0] alarm_metrics_o,
  output logic             pass_o,
  output logic [15:0]      windows_ok_o,
  output logic [NUM_SM-1:0] sm_running_o,
  output logic [NUM_SM-1:0] pmu_dropped_o,   // PMU lost an entry to a full buffer
  output logic             val_busy_o,      // Validator is checking a kernel
  output logic             cache_stall_o
);

  logic vstart;   // the Validator accepted a launch this cycle

  // ---------------- per-SM PMUs ----------------
  logic    [NUM_SM-1:0]         pkt_valid, pkt_ready;
  sample_t [NUM_SM-1:0]         pkt_data;
  logic    [NUM_SM-1:0]         wr_valid, wr_ready;
  logic    [NUM_SM-1:0][ADDR_W+DW-1:0] wr_bundle;

  for (genvar s = 0; s < NUM_SM; s++) begin : g_sm
    logic        sel_cfg;
    addr_t       wr_addr;
    logic [DW-1:0] wr_data;
    logic [15:0] drops;
    assign sel_cfg = cfg_we_i && ((32'(cfg_target_i) == s) || (32'(cfg_target_i) == NUM_SM));

    sm_pmu #(.BUF_DEPTH(PMU_BUF_DEPTH)) u_pmu (
      .clk, .rst_n,
      .events_i(sm_events_i[s]),
      .kstart_i(launch_i && launch_mask_i[s]),
      .kend_i(kend_i),
      .vlaunch_i(vstart),
      .cfg_we_i(sel_cfg), .cfg_addr_i(cfg_addr_i), .cfg_wdata_i(cfg_wdata_i),
      .pkt_valid_o(pkt_valid[s]), .pkt_ready_i(pkt_ready[s]), .pkt_data_o(pkt_data[s]),
      .mem_wr_valid_o(wr_valid[s]), .mem_wr_ready_i(wr_ready[s]),
      .mem_wr_addr_o(wr_addr), .mem_wr_data_o(wr_data),
      .running_o(sm_running_o[s]), .validate_o(),
      .drops_o(drops), .ring_idx_o(), .ring_wraps_o()
    );
    assign wr_bundle[s]     = {wr_addr, wr_data};
    assign pmu_dropped_o[s] = (drops != '0);
  end

  // ---------------- ICNT: PMUs -> Validator ----------------
  logic    icnt_valid, icnt_ready;
  logic [$bits(sample_t)-1:0] icnt_data;

  icnt_arbiter #(.N(NUM_SM), .W($bits(sample_t))) u_icnt_val (
    .clk, .rst_n, .flush_i(vstart),
    .in_valid_i(pkt_valid), .in_ready_o(pkt_ready), .in_data_i(pkt_data),
    .out_valid_o(icnt_valid), .out_ready_i(icnt_ready), .out_data_o(icnt_data),
    .out_src_o()
  );

  // ---------------- ICNT: DMA engines -> device memory ----------------
  logic [ADDR_W+DW-1:0] mem_bundle;


  icnt_arbiter #(.N(NUM_SM), .W(ADDR_W+DW)) u_icnt_mem (
    .clk, .rst_n, .flush_i(1'b0),
    .in_valid_i(wr_valid), .in_ready_o(wr_ready), .in_data_i(wr_bundle),
    .out_valid_o(mem_wr_valid_o), .out_ready_i(mem_wr_ready_i), .out_data_o(mem_bundle),
    .out_src_o()
  );
  assign {mem_wr_addr_o, mem_wr_data_o} = mem_bundle;

  // ---------------- Validator ----------------
  logic [ACT_W-1:0] nactive;
  always_comb begin
    nactive = '0;
    for (int unsigned s = 0; s < NUM_SM; s++) nactive = nactive + ACT_W'(launch_mask_i[s]);
  end

  validator #(.CACHE_ENTRIES(CACHE_ENTRIES), .FETCH_DEPTH(FETCH_DEPTH)) u_val (
    .clk, .rst_n,
    .cfg_we_i(cfg_we_i && (32'(cfg_target_i) == NUM_SM + 1)),
    .cfg_addr_i, .cfg_wdata_i,
    .launch_i, .launch_kid_i, .launch_active_i(nactive),
    .launch_gbase_i, .launch_glen_i, .stop_o,
    .pkt_valid_i(icnt_valid), .pkt_ready_o(icnt_ready), .pkt_data_i(sample_t'(icnt_data)),
    .rd_req_valid_o(mem_rd_req_valid_o), .rd_req_ready_i(mem_rd_req_ready_i),
    .rd_req_addr_o(mem_rd_req_addr_o), .rd_resp_valid_i(mem_rd_resp_valid_i),
    .rd_resp_data_i(mem_rd_resp_data_i),
    .alarm_o, .alarm_kid_o, .alarm_reason_o, .alarm_metrics_o,
    .pass_o, .windows_ok_o, .busy_o(val_busy_o), .vstart_o(vstart), .cache_stall_o
  );

endmodule
