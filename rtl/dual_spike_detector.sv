// dual_spike_detector: 256-channel dual spike detector.
//
// Eight 32-channel detection modules share one sample stream. Every cycle
// at most one sample arrives, tagged with its channel address (upper bits:
// module, lower bits: channel in the module); the addressed module processes
// it while the others stay idle. Each module returns its decision one cycle
// later, and the output multiplexer, steered by the module index of the
// previous sample, turns the eight results into a single time-multiplexed
// stream: spike_valid marks a result, spike is the 1-bit detection for
// spike_addr, and spike_x / spike_s tell which of the two detector paths
// fired. The detection bit for a sample n leaves with the arrival of sample
// n+1 of the same channel, because TEO needs the following sample.
// sigma_upd pulses when a window closed and moved that channel's sigma_S.
// par_we/par_addr/par_sigma load the initial sigma_S of one channel.
//
// Timing: one sample per clock at most; latency from in_valid to spike_valid
// is one cycle. At the paper's 4 MHz clock this handles 15.6 kS/s on each of
// 256 channels (4e6 / 256). The organisation into eight 32-channel modules
// and the output multiplexer follows the paper; the stream format is this
// design's own choice.
module dual_spike_detector
  import spike_pkg::*;
#(
  parameter int unsigned N_MOD      = N_MODULES,
  parameter int unsigned N_CH       = CH_PER_MODULE,
  parameter int unsigned WIN        = WINDOW,
  parameter sigma_t      SIGMA_INIT = sigma_t'(2 << SIG_FRAC_W),
  parameter int          C1_EXP     = 2,
  parameter int          C2_EXP     = 1,
  parameter int          C3_EXP     = -1,
  localparam int unsigned CH_W      = $clog2(N_CH),
  localparam int unsigned SEL_W     = (N_MOD > 1) ? $clog2(N_MOD) : 1,
  localparam int unsigned ADDR_W    = $clog2(N_CH * N_MOD)
) (
  input  logic              clk,
  input  logic              rst_n,
  // digitized neural samples, one channel per cycle
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] in_addr,
  input  logic [X_W-1:0]    in_x,
  // initial sigma_S load
  input  logic              par_we,
  input  logic [ADDR_W-1:0] par_addr,
  input  logic [SIG_W-1:0]  par_sigma,
  // time-multiplexed detection stream
  output logic              spike_valid,
  output logic              spike,
  output logic [ADDR_W-1:0] spike_addr,
  output logic              spike_x,
  output logic              spike_s,
  output logic              sigma_upd
);
  det_out_t         mod_out [N_MOD];
  det_out_t         mux_out;
  logic [SEL_W-1:0] sel_q;

  for (genvar m = 0; m < N_MOD; m++) begin : g_mod
    detection_module #(
      .MODULE_ID(m), .N_CH(N_CH), .N_MOD(N_MOD), .WIN(WIN),
      .SIGMA_INIT(SIGMA_INIT),
      .C1_EXP(C1_EXP), .C2_EXP(C2_EXP), .C3_EXP(C3_EXP)
    ) u_det (
      .clk, .rst_n,
      .in_valid, .in_addr, .in_x(x_t'(in_x)),
      .par_we, .par_addr, .par_sigma(sigma_t'(par_sigma)),
      .out(mod_out[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= '0;
    else        sel_q <= (N_MOD > 1) ? SEL_W'(in_addr >> CH_W) : '0;
  end

  output_mux #(.N_MOD(N_MOD)) u_mux (
    .clk, .rst_n, .mod_out, .sel(sel_q), .out(mux_out)
  );

  assign spike_valid = mux_out.valid;
  assign spike       = mux_out.spike;
  assign spike_addr  = ADDR_W'(mux_out.addr);
  assign spike_x     = mux_out.det_x;
  assign spike_s     = mux_out.det_s;
  assign sigma_upd   = mux_out.sigma_upd;
endmodule
