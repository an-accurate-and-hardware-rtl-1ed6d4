// smooth_teo: smoothing and Teager energy unit of the computational core.
//
// Given the newest sample X[n] of a channel and its three predecessors,
// it forms the two-sample smoothed signal
//     S[k] = (X[k] + X[k-1]) >>> 2        (6 bits)
// for k = n, n-1, n-2 and the two TEO signals of sample n-1:
//     X_TEO = T{X}[n-1]  truncated to 8 bits
//     S_TEO = T{S}[n-1]  truncated to 9 bits
// TEO needs the next sample, so both detections refer to sample n-1 and are
// therefore aligned with each other. S[n] is also given out for the sigma
// estimator. The two-sample window, the TEO operator and the 7/6/8/9-bit
// widths follow the paper. Smoothing as the mean of two samples with its
// LSB dropped (so that it fits 6 bits) is this design's reading of
// "smoothing" and "truncated to 6 bits". Purely combinational.
module smooth_teo
  import spike_pkg::*;
(
  input  x_t    x0,      // X[n]
  input  x_t    x1,      // X[n-1]
  input  x_t    x2,      // X[n-2]
  input  x_t    x3,      // X[n-3]
  output s_t    s0,      // S[n]
  output xteo_t x_teo,   // T{X}[n-1]
  output steo_t s_teo    // T{S}[n-1]
);
  s_t s1, s2;

  // Sum of two 7-bit samples needs 8 bits; >>>2 brings it to 6 bits.
  function automatic s_t smooth(x_t a, x_t b);
    logic signed [X_W:0] sum;
    sum = (X_W + 1)'(a) + (X_W + 1)'(b);
    return s_t'(sum >>> 2);
  endfunction

  assign s0 = smooth(x0, x1);
  assign s1 = smooth(x1, x2);
  assign s2 = smooth(x2, x3);

  teo_op #(.W(X_W), .OUT_W(XTEO_W), .SHIFT(XTEO_SHIFT)) u_teo_x (
    .x_prev(x2), .x_cur(x1), .x_next(x0), .teo(x_teo)
  );

  teo_op #(.W(S_W), .OUT_W(STEO_W), .SHIFT(STEO_SHIFT)) u_teo_s (
    .x_prev(s2), .x_cur(s1), .x_next(s0), .teo(s_teo)
  );
endmodule
