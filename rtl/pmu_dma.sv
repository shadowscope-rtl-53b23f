// pmu_dma -- the PMU's DMA engine for standard profiling mode.
//
// When kernel validation is off, the PMU's buffer entries are copied into a
// ring buffer in global device memory, where profiling tools read them or a
// golden model is built from them (the paper's function). This engine takes
// one entry at a time from the buffer and issues one memory write per entry
// at base + wr_idx * ENTRY_BYTES, wrapping wr_idx at the ring size. Entry
// layout in memory, byte address increasing: cntr1..cntr8, then ts (the
// packed {ts, cntr[7:0]} word, 36 bytes). The kernel-end flag is not stored.
//
// Own choices (the paper gives only the function): one full entry per write
// beat; the ring is overwrite-oldest with no read pointer; writing the base
// register (`ring_reset_i`) restarts at index 0; `wraps_o` counts wrap-arounds.
//
// Timing: an entry accepted in cycle t is presented as a write request from
// t+1 until the memory side takes it; one entry in flight at a time.
module pmu_dma
  import ssp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  addr_t       ring_base_i,
  input  logic [15:0] ring_size_i,   // entries; 0 is treated as 1
  input  logic        ring_reset_i,
  // from the output buffer
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  sample_t     in_data_i,
  // memory write request
  output logic        wr_valid_o,
  input  logic        wr_ready_i,
  output addr_t       wr_addr_o,
  output logic [TS_W+NUM_CNTR*CNTR_W-1:0] wr_data_o,
  output logic [15:0] wr_idx_o,
  output logic [15:0] wraps_o
);

  logic [15:0] last_idx;
  assign last_idx   = (ring_size_i == '0) ? '0 : ring_size_i - 1'b1;
  assign in_ready_o = !wr_valid_o && !ring_reset_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_valid_o <= 1'b0;
      wr_addr_o  <= '0;
      wr_data_o  <= '0;
      wr_idx_o   <= '0;
      wraps_o    <= '0;
    end else if (ring_reset_i) begin
      wr_valid_o <= 1'b0;
      wr_idx_o   <= '0;
      wraps_o    <= '0;
    end else begin
      if (wr_valid_o && wr_ready_i) begin
        wr_valid_o <= 1'b0;
        if (wr_idx_o >= last_idx) begin
          wr_idx_o <= '0;
          wraps_o  <= wraps_o + 1'b1;
        end else begin
          wr_idx_o <= wr_idx_o + 1'b1;
        end
      end
      if (in_valid_i && in_ready_o) begin
        wr_valid_o <= 1'b1;
        wr_addr_o  <= ring_base_i + ADDR_W'(wr_idx_o) * ADDR_W'(ENTRY_BYTES);
        wr_data_o  <= {in_data_i.ts, in_data_i.cntr};
      end
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n || ring_reset_i)
    (wr_valid_o && !wr_ready_i) |=> (wr_valid_o && $stable(wr_addr_o) && $stable(wr_data_o)));

endmodule
