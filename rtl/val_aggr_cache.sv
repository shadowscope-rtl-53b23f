// val_aggr_cache -- the Validator's PMU aggregation cache.
//
// Every active PMU sends one packet per sampling window, tagged with the
// window's timestamp ts. As the paper describes, the cache uses ts as the
// tag: on a miss it allocates a block and sets its active-PMU count `act`
// from the number of SMs running the kernel (given by the dispatcher); on a
// hit it adds the packet's eight counter values to the block with eight
// 32-bit adders and decrements `act`. When `act` reaches zero every PMU has
// reported, the block's sums leave on the output port as the window's
// aggregated metrics and the block is freed. A block is ts (32-bit tag) +
// act (8 bits) + eight 32-bit metrics, the paper's 33-byte block.
//
// Own choices: the allocating packet is counted at once, so a new block
// starts with act = active - 1 (a kernel on one SM completes immediately);
// the cache is fully associative with ENTRIES blocks (the paper says only
// "small"); on a miss with no free block, or a completion while the output
// register is still occupied, the input is held (ready low) rather than a
// packet dropped; `stall_o` flags the first case. Adds wrap at 2^32.
// `clear_i` (kernel launch) empties the cache.
//
// Timing: one packet per cycle; a window completes in the cycle its last
// packet is accepted and is on the output from the next cycle.
module val_aggr_cache
  import ssp_pkg::*;
#(
  parameter int unsigned ENTRIES = 4,
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_i,
  input  logic [ACT_W-1:0] num_active_i,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  sample_t          in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output sample_t          out_data_o,
  output logic             stall_o,       // miss with every block in use
  output logic [EW:0]      used_o         // blocks in use
);

  typedef struct packed {
    logic                 last;
    ts_t                  tag;
    logic [ACT_W-1:0]     act;
    cntr_t [NUM_CNTR-1:0] metr;
  } blk_t;

  blk_t blk       [ENTRIES];
  logic [ENTRIES-1:0] vld;

  logic             hit, free_any, completes, out_free, accept;
  logic [EW-1:0]    hit_idx, free_idx, wr_idx;
  logic [ACT_W-1:0] new_act;
  cntr_t [NUM_CNTR-1:0] sum;
  logic             new_last;

  always_comb begin
    hit = 1'b0; hit_idx = '0; free_any = 1'b0; free_idx = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      if (!hit && vld[e] && blk[e].tag == in_data_i.ts) begin
        hit = 1'b1; hit_idx = EW'(e);
      end
      if (!free_any && !vld[e]) begin
        free_any = 1'b1; free_idx = EW'(e);
      end
    end
    if (hit) begin
      new_act  = blk[hit_idx].act - 1'b1;
      new_last = blk[hit_idx].last | in_data_i.last;
      for (int unsigned m = 0; m < NUM_CNTR; m++)
        sum[m] = blk[hit_idx].metr[m] + in_data_i.cntr[m];
    end else begin
      new_act  = (num_active_i == '0) ? '0 : num_active_i - 1'b1;
      new_last = in_data_i.last;
      sum      = in_data_i.cntr;
    end
    wr_idx    = hit ? hit_idx : free_idx;
    completes = (new_act == '0);
    out_free  = !out_valid_o || out_ready_i;
    in_ready_o = !clear_i && (hit || free_any) && (!completes || out_free);
    accept    = in_valid_i && in_ready_o;
  end

  assign stall_o = in_valid_i && !clear_i && !hit && !free_any;

  always_comb begin
    used_o = '0;
    for (int unsigned e = 0; e < ENTRIES; e++) used_o = used_o + (EW+1)'(vld[e]);
  end

  always_ff @(posedge clk) begin
    if (accept && !completes) begin
      blk[wr_idx].last <= new_last;
      blk[wr_idx].tag  <= in_data_i.ts;
      blk[wr_idx].act  <= new_act;
      blk[wr_idx].metr <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld         <= '0;
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
    end else if (clear_i) begin
      vld         <= '0;
      out_valid_o <= 1'b0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (accept) begin
        if (completes) begin
          vld[wr_idx] <= 1'b0;
          out_valid_o <= 1'b1;
          out_data_o  <= '{last: new_last, ts: in_data_i.ts, cntr: sum};
        end else begin
          vld[wr_idx] <= 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || clear_i)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o)));

endmodule
