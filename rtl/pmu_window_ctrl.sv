// pmu_window_ctrl -- cycle counter and sampling-window control of a PMU.
//
// A TS_W-bit cycle counter restarts at zero when the dispatcher starts the
// kernel on this SM and counts the cycles the kernel has run. A sampling
// window closes when the firmware-set period has elapsed or when the kernel
// ends, as the paper describes; the entry of that window is stamped with
// ts = number of cycles since kernel start at the end of the window. Because
// the dispatcher starts and ends a kernel on all of its SMs in the same
// cycle, every PMU of a kernel stamps a given window with the same ts, which
// is what lets the Validator use ts as the tag that groups samples across
// SMs (that common start is an assumption of this design).
//
// Interface/timing: `start_i` (one cycle) arms the unit; counting begins in
// the next cycle. `end_i` in a running cycle counts that cycle, closes the
// final window (`win_end_o` with `last_o`) and stops. `period_i` = 0 means
// windows close only at kernel end. `win_end_o`, `ts_o` and `last_o` are
// combinational for the current cycle; `run_o` is the count enable.
module pmu_window_ctrl #(
  parameter int unsigned TS_W = ssp_pkg::TS_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,    // kernel dispatched to this SM
  input  logic            end_i,      // kernel finished
  input  logic [TS_W-1:0] period_i,   // window length in cycles
  output logic            run_o,      // kernel running: counters enabled
  output logic            win_end_o,  // this cycle closes a window
  output logic            last_o,     // ... and it is the kernel-end window
  output logic [TS_W-1:0] ts_o        // timestamp of the closing window
);

  logic            running;
  logic [TS_W-1:0] cyc;      // cycles completed since kernel start
  logic [TS_W-1:0] win_cyc;  // cycles completed in the current window

  logic period_hit;
  assign period_hit = (period_i != '0) && (win_cyc + 1'b1 == period_i);

  assign run_o     = running;
  assign win_end_o = running && (period_hit || end_i);
  assign last_o    = running && end_i;
  assign ts_o      = cyc + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cyc     <= '0;
      win_cyc <= '0;
    end else if (start_i) begin
      running <= 1'b1;
      cyc     <= '0;
      win_cyc <= '0;
    end else if (running) begin
      cyc     <= cyc + 1'b1;
      win_cyc <= win_end_o ? '0 : win_cyc + 1'b1;
      if (end_i) running <= 1'b0;
    end
  end

endmodule
