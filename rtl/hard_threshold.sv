// hard_threshold: the two comparators and the combining gate of the
// computational core.
//
// A spike is flagged when X_TEO is above Thr_X or S_TEO is above Thr_S. The
// TEO value drives the comparator's plus input and the threshold its minus
// input, as drawn in the architecture figure; the thresholds are unsigned
// and compared as non-negative signed values. The per-path flags are given
// out as well. Follows the paper. Purely combinational.
module hard_threshold
  import spike_pkg::*;
(
  input  xteo_t x_teo,
  input  steo_t s_teo,
  input  thrx_t thr_x,
  input  thrs_t thr_s,
  output logic  det_x,   // X path fired
  output logic  det_s,   // S path fired
  output logic  spike    // either path fired
);
  assign det_x = x_teo > $signed({1'b0, thr_x});
  assign det_s = s_teo > $signed({1'b0, thr_s});
  assign spike = det_x | det_s;
endmodule
