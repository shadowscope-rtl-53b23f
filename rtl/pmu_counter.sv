// pmu_counter -- one event selector and its up-counter inside a per-SM PMU.
//
// The SM raises a set of one-bit, one-cycle event signals (instruction
// issue, L1D hit/miss, idle scheduler slot, ...). An EVENTS_PER_MUX-to-1
// multiplexer picks one of them under control of a firmware select register,
// and a CNTR_W-bit counter adds one on every cycle the picked signal is high
// while counting is enabled. These follow the paper: eight 8-to-1 selectors,
// each feeding a dedicated 32-bit up-counter.
//
// Window handling: `snap_o` is the count including the current cycle's event
// (count + increment). In the cycle `clear_i` is high the PMU stores `snap_o`
// in its output buffer and the counter restarts from zero, so no event is
// lost or counted twice at a window boundary. The counter wraps at 2^CNTR_W
// (the paper does not say; a 700 MHz window would need > 6 s to wrap).
//
// Timing: one register; `snap_o` is combinational from the inputs.
module pmu_counter #(
  parameter int unsigned EVENTS_PER_MUX = ssp_pkg::EVENTS_PER_MUX,
  parameter int unsigned CNTR_W         = ssp_pkg::CNTR_W,
  localparam int unsigned SEL_W         = (EVENTS_PER_MUX > 1) ? $clog2(EVENTS_PER_MUX) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [EVENTS_PER_MUX-1:0] events_i,  // one-bit event signals from the SM
  input  logic [SEL_W-1:0]          sel_i,     // event select register
  input  logic                      en_i,      // count only while the kernel runs
  input  logic                      clear_i,   // window end: restart from zero
  output logic [CNTR_W-1:0]         count_o,   // registered count
  output logic [CNTR_W-1:0]         snap_o     // count including this cycle
);

  logic inc;

  // Event selector (the multiplexer of Fig. 11). Out-of-range selects read 0.
  always_comb begin
    inc = 1'b0;
    if (32'(sel_i) < EVENTS_PER_MUX) inc = events_i[sel_i] & en_i;
  end

  assign snap_o = count_o + CNTR_W'(inc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count_o <= '0;
    else if (clear_i) count_o <= '0;
    else              count_o <= snap_o;
  end

endmodule
