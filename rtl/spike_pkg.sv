// spike_pkg: widths, types and constants shared by the dual spike detector.
//
// The detector works on 7-bit two's-complement samples X of each neural
// channel. A two-sample smoothed copy S is kept at 6 bits. The Teager energy
// (TEO) of X is truncated to 8 bits and that of S to 9 bits. These four widths,
// the 32-channel module size, the 8 modules, the 256-sample window, the
// convergence factor 20 and the scaling factor 0.001 (taken here as 2^-10)
// follow the paper. The bit positions kept by each truncation, the
// fixed-point format of sigma and the channel-state layout are this design's
// own choices, made so that no value can overflow its field.
package spike_pkg;

  // ---- sizes of the array -------------------------------------------------
  localparam int unsigned N_MODULES     = 8;    // 32-channel modules
  localparam int unsigned CH_PER_MODULE = 32;   // channels sharing one core
  localparam int unsigned N_CHANNELS    = N_MODULES * CH_PER_MODULE;  // 256

  // ---- data widths ----------------------------------------------------------
  localparam int unsigned X_W     = 7;  // raw sample X
  localparam int unsigned S_W     = 6;  // smoothed sample S
  localparam int unsigned XTEO_W  = 8;  // truncated TEO of X
  localparam int unsigned STEO_W  = 9;  // truncated TEO of S

  // Right shifts that take the full-precision TEO to the truncated width.
  // Full TEO of a 7-bit signal spans [-4032, 8128]; >>>6 gives [-63, 127].
  // Full TEO of a 6-bit signal spans [-1024, 2016]; >>>3 gives [-128, 252].
  localparam int unsigned XTEO_SHIFT = 6;
  localparam int unsigned STEO_SHIFT = 3;

  // ---- adaptive threshold ---------------------------------------------------
  // sigma_S is unsigned fixed point: SIG_INT_W integer bits (S is at most 31)
  // and SIG_FRAC_W fractional bits. Scaling factor 0.001 ~= 2^-SIG_FRAC_W, so
  // "scale * (count - convergence)" is the difference added at the LSB.
  localparam int unsigned SIG_INT_W  = 5;
  localparam int unsigned SIG_FRAC_W = 10;
  localparam int unsigned SIG_W      = SIG_INT_W + SIG_FRAC_W;
  localparam int unsigned WINDOW     = 256;  // samples per sigma update
  localparam int unsigned CNT_W      = 8;    // exceed counter, 0..WINDOW-1
  localparam int unsigned CONV_FACTOR = 20;  // convergence factor

  // Thresholds are non-negative and saturate at the largest positive TEO.
  localparam int unsigned THRX_W = XTEO_W - 1;  // 0..127
  localparam int unsigned THRS_W = STEO_W - 1;  // 0..255

  typedef logic signed [X_W-1:0]    x_t;
  typedef logic signed [S_W-1:0]    s_t;
  typedef logic signed [XTEO_W-1:0] xteo_t;
  typedef logic signed [STEO_W-1:0] steo_t;
  typedef logic        [SIG_W-1:0]  sigma_t;
  typedef logic        [CNT_W-1:0]  cnt_t;
  typedef logic        [THRX_W-1:0] thrx_t;
  typedef logic        [THRS_W-1:0] thrs_t;

  // State kept per channel: the five register banks. Three past samples
  // (data memory) and the sigma estimate with its exceed counter
  // (parameter memory).
  typedef struct packed {
    x_t     x1;     // X[n-1]
    x_t     x2;     // X[n-2]
    x_t     x3;     // X[n-3]
    sigma_t sigma;  // sigma_S estimate, Q5.10
    cnt_t   cnt;    // samples of the current window with S > sigma_S
  } chan_state_t;

  // One detector result, as it leaves a module and the output multiplexer.
  typedef struct packed {
    logic       valid;      // a sample was processed in the previous cycle
    logic       spike;      // detection output (X path OR S path)
    logic       det_x;      // X_TEO exceeded Thr_X
    logic       det_s;      // S_TEO exceeded Thr_S
    logic       sigma_upd;  // this sample closed a window and moved sigma_S
    logic [$clog2(N_CHANNELS)-1:0] addr;  // channel the result belongs to
  } det_out_t;

  // Sigma value SIGMA in Q5.10 from an integer and a numerator of 1/1024.
  function automatic sigma_t sigma_q(int unsigned int_part, int unsigned frac_1024);
    return sigma_t'((int_part << SIG_FRAC_W) + frac_1024);
  endfunction

endpackage
