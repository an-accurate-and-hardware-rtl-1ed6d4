// sigma_estimator: online estimate of the standard deviation of S.
//
// This is the combinational feedback path of the std estimator: a
// comparator, a counter increment, a subtractor for the convergence factor,
// a scaling and an adder. The registers that close the loop (sigma_S and the
// counter, one pair per channel) live in the memory bank. For each sample:
//     exceed    = S[n] > sigma_S
//     total     = cnt + exceed
// and on the last sample of a window (window_end):
//     sigma_S  += scale * (total - CONV)      scale = 2^-SIG_FRAC_W
//     cnt       = 0
// otherwise cnt = total and sigma_S is kept. sigma_S is held in Q5.10, so the
// scaling is a plain alignment at the LSB; it is clamped to [0, 32).
// The loop structure, the convergence factor 20 and the scaling factor 0.001
// (here 1/1024) follow the paper. The signed comparison of S against the
// integer part of sigma_S (exact, as S is an integer), the fixed-point format
// and the clamping are this design's choices. Purely combinational.
module sigma_estimator
  import spike_pkg::*;
#(
  parameter int unsigned CONV = CONV_FACTOR
) (
  input  s_t     s,           // S[n], the smoothed sample
  input  sigma_t sigma,       // current sigma_S of the channel
  input  cnt_t   cnt,         // exceed count so far in this window
  input  logic   window_end,  // this sample is the last of the window
  output sigma_t sigma_next,
  output cnt_t   cnt_next,
  output logic   exceed       // S[n] > sigma_S
);
  localparam int unsigned DW = SIG_W + 2;  // room for sign and carry
  localparam logic signed [DW-1:0] SMAX = DW'((1 << SIG_W) - 1);

  logic [CNT_W:0]          total;
  logic signed [DW-1:0]    diff, sum;
  logic signed [S_W:0]     sig_int;

  always_comb begin
    sig_int = (S_W + 1)'(sigma[SIG_W-1 -: SIG_INT_W]);  // zero-extended integer part
    exceed  = (S_W + 1)'(s) > sig_int;
    total   = (CNT_W + 1)'(cnt) + (CNT_W + 1)'(exceed);
    diff    = DW'(total) - DW'(CONV);
    sum     = DW'(sigma) + diff;

    if (window_end) begin
      cnt_next = '0;
      if (sum < 0)          sigma_next = '0;
      else if (sum > SMAX)  sigma_next = SMAX[SIG_W-1:0];
      else                  sigma_next = sum[SIG_W-1:0];
    end else begin
      cnt_next   = (total > (CNT_W + 1)'((1 << CNT_W) - 1)) ? '1 : total[CNT_W-1:0];
      sigma_next = sigma;
    end
  end
endmodule
