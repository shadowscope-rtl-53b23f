// pmu_out_buffer -- the PMU's output buffer of sample entries.
//
// At every window end the PMU writes one entry {ts, cntr1..cntr8} (36 bytes
// of payload, plus the kernel-end flag) into this first-in first-out buffer,
// which holds DEPTH entries (eight in the paper, 288 bytes). The head entry
// is offered on a valid/ready port to the DMA engine or the interconnect.
//
// The paper does not say what happens when a window closes with the buffer
// full. Here the new entry is dropped and counted in `drops_o`, so counting
// is never stalled and the SM is never slowed by its monitor.
//
// `flush_i` empties the buffer (used when a new validated kernel is launched,
// so that entries of an aborted kernel never reach the Validator).
//
// Timing: a push is visible at the head one cycle later; push and pop in the
// same cycle are allowed, also when full (the pop frees the slot first).
module pmu_out_buffer
  import ssp_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush_i,
  input  logic        push_i,
  input  sample_t     push_data_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output sample_t     out_data_o,
  output logic [PW:0] count_o,     // entries held
  output logic [15:0] drops_o      // entries lost to a full buffer (saturating)
);

  sample_t       mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic          pop, push_ok;

  assign out_valid_o = (count_o != '0);
  assign out_data_o  = mem[rd_ptr];
  assign pop         = out_valid_o && out_ready_i;
  assign push_ok     = push_i && ((count_o < (PW+1)'(DEPTH)) || pop);

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (32'(p) == DEPTH-1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push_ok) mem[wr_ptr] <= push_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count_o <= '0;
      drops_o <= '0;
    end else if (flush_i) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count_o <= '0;
    end else begin
      if (pop)     rd_ptr <= next_ptr(rd_ptr);
      if (push_ok) wr_ptr <= next_ptr(wr_ptr);
      count_o <= count_o + (PW+1)'(push_ok) - (PW+1)'(pop);
      if (push_i && !push_ok && drops_o != '1) drops_o <= drops_o + 1'b1;
    end
  end

  // The head entry must stay put while it is offered and not taken.
  a_head_stable: assert property (@(posedge clk) disable iff (!rst_n || flush_i)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o)));

endmodule
