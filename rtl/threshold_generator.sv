// threshold_generator: the two detection thresholds from sigma_S (Eq. 2).
//
//     Thr_X = C1 * sigma_S
//     Thr_S = C2 * sigma_S + C3 * sigma_S^2
// Each coefficient is a power of two, C = 2^EXP with a signed exponent, so the
// products are shifts; only sigma_S^2 needs a (5-bit) squarer. The integer
// part of sigma_S is used, the same value the sigma comparator sees. Results
// are saturated to the largest positive value of the TEO signal they are
// compared with (127 for X_TEO, 255 for S_TEO).
// The formulas and the power-of-two form follow the paper. It gives no
// coefficient values: the defaults C1 = 4, C2 = 2, C3 = 1/2 are this design's
// own, picked on synthetic recordings (noise levels 0.05-0.2), and are meant
// to be tuned on real data. Purely combinational.
module threshold_generator
  import spike_pkg::*;
#(
  parameter int C1_EXP = 2,
  parameter int C2_EXP = 1,
  parameter int C3_EXP = -1
) (
  input  sigma_t sigma,
  output thrx_t  thr_x,
  output thrs_t  thr_s
);
  localparam int unsigned AW = 24;  // wide enough for any shift used here

  logic [AW-1:0] sig, sig2, tx, ts;

  function automatic logic [AW-1:0] pow2_mul(logic [AW-1:0] v, int e);
    return (e >= 0) ? (v << e) : (v >> (-e));
  endfunction

  always_comb begin
    sig  = AW'(sigma[SIG_W-1 -: SIG_INT_W]);
    sig2 = sig * sig;
    tx   = pow2_mul(sig, C1_EXP);
    ts   = pow2_mul(sig, C2_EXP) + pow2_mul(sig2, C3_EXP);
    thr_x = (tx > AW'((1 << THRX_W) - 1)) ? '1 : tx[THRX_W-1:0];
    thr_s = (ts > AW'((1 << THRS_W) - 1)) ? '1 : ts[THRS_W-1:0];
  end
endmodule
