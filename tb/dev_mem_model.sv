// dev_mem_model -- behavioural model of GPU device memory for testbenches.
// Not synthesizable. Entries are 36-byte words ({ts, cntr[7:0]}) stored by
// byte address in an associative array. The write port accepts a request
// after a random 0..3-cycle wait; the read port accepts one request at a
// time and answers in order after RD_LAT..RD_LAT+3 cycles. poke()/peek()
// give the testbench direct access (loading a golden model, reading a ring
// buffer).
module dev_mem_model #(
  parameter int unsigned DW     = 288,
  parameter int unsigned RD_LAT = 4
) (
  input  logic          clk,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [31:0]   wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [31:0]   rd_req_addr,
  output logic          rd_resp_valid,
  output logic [DW-1:0] rd_resp_data
);
  logic [DW-1:0] store [logic [31:0]];
  int unsigned   writes = 0, reads = 0;
  logic          rd_busy = 1'b0;
  logic [31:0]   rd_addr_q;
  int unsigned   rd_wait;

  function automatic void poke(input logic [31:0] a, input logic [DW-1:0] d);
    store[a] = d;
  endfunction
  function automatic logic [DW-1:0] peek(input logic [31:0] a);
    return store.exists(a) ? store[a] : '0;
  endfunction

  initial begin
    wr_ready = 1'b0; rd_resp_valid = 1'b0; rd_resp_data = '0;
  end

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      store[wr_addr] = wr_data;
      writes++;
    end
    wr_ready <= ($urandom % 4) != 0;
  end

  always @(posedge clk) begin
    rd_resp_valid <= 1'b0;
    if (rd_busy) begin
      if (rd_wait == 0) begin
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= peek(rd_addr_q);
        rd_busy       <= 1'b0;
      end else begin
        rd_wait--;
      end
    end else if (rd_req_valid && rd_req_ready) begin
      rd_busy   <= 1'b1;
      rd_addr_q <= rd_req_addr;
      rd_wait    = RD_LAT + $urandom_range(0, 3);
      reads++;
    end
  end
  assign rd_req_ready = !rd_busy;
endmodule
