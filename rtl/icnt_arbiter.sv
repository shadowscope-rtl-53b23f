// icnt_arbiter -- one interconnect (ICNT) path from N sources to one sink.
//
// In the paper the PMUs of all SMs send their sample packets over the GPU's
// interconnection network to the Validator, which sits on the network next
// to the SMs and memory partitions; in profiling mode the DMA engines write
// through the same network to device memory. The paper names the ICNT but
// does not design it. This block is the simplest path that does the job: a
// round-robin arbiter that grants one requesting source per cycle and a
// one-entry output register, giving one packet per cycle of throughput.
//
// Interface: per-source valid/ready/data, one output valid/ready/data plus
// the index of the source (`out_src_o`). Payload width W is a parameter; its
// default is one PMU packet.
// `flush_i` drops the packet held in the output register and grants nothing
// in that cycle.
//
// Timing: a packet granted in cycle t is on the output from t+1. The
// round-robin pointer moves past each granted source, so no source waits for
// more than N-1 other packets.
module icnt_arbiter #(
  parameter int unsigned N   = 15,
  parameter int unsigned W   = $bits(ssp_pkg::sample_t),
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush_i,
  input  logic [N-1:0]          in_valid_i,
  output logic [N-1:0]          in_ready_o,
  input  logic [N-1:0][W-1:0]   in_data_i,
  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output logic [W-1:0]          out_data_o,
  output logic [SW-1:0]         out_src_o
);

  logic [SW-1:0] rr_ptr;     // highest-priority source this cycle
  logic          grant_any;
  logic [SW-1:0] grant_idx;
  logic          load;

  // Round-robin pick: first valid source at or after rr_ptr.
  always_comb begin
    grant_any = 1'b0;
    grant_idx = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (32'(rr_ptr) + k) % N;
      if (!grant_any && in_valid_i[idx]) begin
        grant_any = 1'b1;
        grant_idx = SW'(idx);
      end
    end
  end

  assign load = grant_any && !flush_i && (!out_valid_o || out_ready_i);

  always_comb begin
    in_ready_o = '0;
    if (load) in_ready_o[grant_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
      out_src_o   <= '0;
      rr_ptr      <= '0;
    end else if (flush_i) begin
      out_valid_o <= 1'b0;
    end else begin
      if (load) begin
        out_valid_o <= 1'b1;
        out_data_o  <= in_data_i[grant_idx];
        out_src_o   <= grant_idx;
        rr_ptr      <= (32'(grant_idx) == N-1) ? '0 : grant_idx + 1'b1;
      end else if (out_ready_i) begin
        out_valid_o <= 1'b0;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || flush_i)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o)));
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready_o));

endmodule
