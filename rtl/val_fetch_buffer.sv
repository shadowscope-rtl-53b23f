// val_fetch_buffer -- the Validator's golden-model fetch buffer.
//
// When a validated kernel is launched, its golden model -- one entry per
// sampling window, {ts, metr1..metr8}, laid out in device memory like a PMU
// ring-buffer entry (36 bytes, see pmu_dma) -- is read from device memory
// into a small buffer, in window order, and handed to the comparator one
// entry per window. The paper gives four entries (144 bytes), mirroring the
// PMU buffer at half size; that is the DEPTH default.
//
// Own choices: one read request of a full entry is in flight at a time;
// reads are issued while entries remain and a slot is free for the answer;
// responses return in order. `start_i` flushes the buffer and restarts at
// `base_i` for `len_i` entries; an answer to a request issued before the
// restart is discarded. `exhausted_o` is high when every golden entry has
// been read out, which the Validator uses to detect a kernel that runs more
// windows than its golden model has.
//
// Timing: a request is issued the cycle after a slot frees; the response
// enters the buffer the cycle it arrives and is at the head one cycle later.
module val_fetch_buffer
  import ssp_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned DW   = TS_W + NUM_CNTR*CNTR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  addr_t         base_i,
  input  logic [15:0]   len_i,         // golden entries (windows) of the kernel
  // memory read port
  output logic          rd_req_valid_o,
  input  logic          rd_req_ready_i,
  output addr_t         rd_req_addr_o,
  input  logic          rd_resp_valid_i,
  input  logic [DW-1:0] rd_resp_data_i,
  // golden entries toward the comparator
  output logic          out_valid_o,
  input  logic          out_ready_i,
  output sample_t       out_data_o,
  output logic          exhausted_o
);

  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          outstanding, discard;
  logic [15:0]   issued, len;
  addr_t         next_addr;
  logic          push, pop;

  assign push = rd_resp_valid_i && outstanding && !discard;
  assign pop  = out_valid_o && out_ready_i;

  assign out_valid_o = (count != '0);
  assign out_data_o  = '{last: 1'b0, ts: mem[rd_ptr][DW-1 -: TS_W],
                         cntr: mem[rd_ptr][NUM_CNTR*CNTR_W-1:0]};
  assign exhausted_o = (issued == len) && !outstanding && (count == '0);

  assign rd_req_addr_o  = next_addr;
  assign rd_req_valid_o = !start_i && !outstanding && (issued != len) &&
                          (count < (PW+1)'(DEPTH));

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (32'(p) == DEPTH-1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= rd_resp_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      outstanding <= 1'b0; discard <= 1'b0;
      issued <= '0; len <= '0; next_addr <= '0;
    end else if (start_i) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      issued <= '0; len <= len_i; next_addr <= base_i;
      discard <= outstanding && !rd_resp_valid_i;
      outstanding <= outstanding && !rd_resp_valid_i;
    end else begin
      if (rd_req_valid_o && rd_req_ready_i) begin
        outstanding <= 1'b1;
        issued      <= issued + 1'b1;
        next_addr   <= next_addr + ADDR_W'(ENTRY_BYTES);
      end
      if (rd_resp_valid_i && outstanding) begin
        outstanding <= 1'b0;
        discard     <= 1'b0;
      end
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid_i |-> outstanding);

endmodule
