// val_compare -- the Validator's comparison logic.
//
// As in the paper: eight subtractors form the distance between each
// aggregated metric of a window and the matching golden-model metric, eight
// magnitude comparators test each distance against one shared threshold
// register, and the window fails when any distance exceeds the threshold.
// The distance is the absolute difference |agg - golden| (the paper says
// "distance" and names subtractors and magnitude comparators; taking the
// absolute value is this design's reading). "Exceeds" is strict: a distance
// equal to the threshold passes.
//
// Purely combinational; the Validator registers the result.
module val_compare
  import ssp_pkg::*;
(
  input  cntr_t [NUM_CNTR-1:0] agg_i,
  input  cntr_t [NUM_CNTR-1:0] gold_i,
  input  cntr_t                thresh_i,
  output cntr_t [NUM_CNTR-1:0] dist_o,
  output logic  [NUM_CNTR-1:0] over_o,   // per-metric deviation flags
  output logic                 fail_o
);

  always_comb begin
    for (int unsigned m = 0; m < NUM_CNTR; m++) begin
      dist_o[m] = (agg_i[m] >= gold_i[m]) ? agg_i[m] - gold_i[m] : gold_i[m] - agg_i[m];
      over_o[m] = dist_o[m] > thresh_i;
    end
    fail_o = |over_o;
  end

endmodule
