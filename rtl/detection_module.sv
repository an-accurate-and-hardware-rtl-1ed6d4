// detection_module: one 32-channel dual spike detector.
//
// All 32 channels share one computational core (smoothing, two TEO units,
// two comparators and their OR) and one threshold calculator (sigma
// estimator and threshold generator); only the per-channel state is
// replicated, in the memory bank. When the control unit activates the
// module for a sample X[n] of local channel c, in that one cycle:
//   1. the bank entry of c is read (X[n-1..n-3], sigma_S, counter);
//   2. S[n], X_TEO[n-1] and S_TEO[n-1] are formed;
//   3. thresholds come from the stored sigma_S, and the spike decision for
//      sample n-1 is the OR of the two comparisons;
//   4. the sigma estimator updates sigma_S and the counter;
//   5. the shifted history and new threshold state are written back.
// The result is registered: out.valid is high one cycle after the sample
// was presented, with the channel's global address. The clock of the
// register banks and the frame counter is gated: it only pulses in cycles
// in which the module is addressed, so the other seven modules' state does
// not switch. Only the result's valid flag runs on the free clock.
// Structure and sharing follow the paper's architecture figure; the
// single-cycle schedule, the placement of the clock gate and the result
// format are this design's choices.
module detection_module
  import spike_pkg::*;
#(
  parameter int unsigned MODULE_ID  = 0,
  parameter int unsigned N_CH       = CH_PER_MODULE,
  parameter int unsigned N_MOD      = N_MODULES,
  parameter int unsigned WIN        = WINDOW,
  parameter sigma_t      SIGMA_INIT = sigma_t'(2 << SIG_FRAC_W),
  parameter int          C1_EXP     = 2,
  parameter int          C2_EXP     = 1,
  parameter int          C3_EXP     = -1,
  localparam int unsigned CH_W      = $clog2(N_CH),
  localparam int unsigned MOD_W     = (N_MOD > 1) ? $clog2(N_MOD) : 1,
  localparam int unsigned ADDR_W    = $clog2(N_CH * N_MOD)
) (
  input  logic              clk,
  input  logic              rst_n,
  // sample stream
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] in_addr,
  input  x_t                in_x,
  // parameter load (initial sigma_S of one channel)
  input  logic              par_we,
  input  logic [ADDR_W-1:0] par_addr,
  input  sigma_t            par_sigma,
  // registered result
  output det_out_t          out
);
  logic        active, window_end;
  logic [CH_W-1:0] ch;
  chan_state_t rd, wr;
  s_t          s0;
  xteo_t       x_teo;
  steo_t       s_teo;
  thrx_t       thr_x;
  thrs_t       thr_s;
  logic        det_x, det_s, spike, exceed;
  logic        par_hit;
  logic        mem_clk;


  assign par_hit = par_we &&
                   ((N_MOD > 1) ? (MOD_W'(par_addr >> CH_W) == MOD_W'(MODULE_ID)) : 1'b1);

  // The register banks only see a clock edge when this module is addressed
  // by a sample or a parameter load, and during reset (so that a reset held
  // from power-up also reaches them through a clock edge).
  clock_gate u_cg (
    .clk, .en(active | par_hit | !rst_n), .test_en(1'b0), .gclk(mem_clk)
  );

  // The frame counter only advances when the module is addressed, so it
  // shares the gated clock; nothing on the gated clock then reads a flop of
  // the free-running clock.
  control_unit #(.MODULE_ID(MODULE_ID), .N_CH(N_CH), .N_MOD(N_MOD), .WIN(WIN)) u_ctrl (
    .clk(mem_clk), .rst_n, .in_valid, .in_addr, .active, .ch, .window_end
  );

  memory_bank #(.DEPTH(N_CH), .SIGMA_INIT(SIGMA_INIT)) u_mem (
    .clk(mem_clk), .rst_n,
    .rd_addr (ch),
    .rd_data (rd),
    .wr_en   (active),
    .wr_addr (ch),
    .wr_data (wr),
    .par_we  (par_hit),
    .par_addr(par_addr[CH_W-1:0]),
    .par_sigma
  );

  smooth_teo u_core (
    .x0(in_x), .x1(rd.x1), .x2(rd.x2), .x3(rd.x3),
    .s0, .x_teo, .s_teo
  );

  threshold_generator #(.C1_EXP(C1_EXP), .C2_EXP(C2_EXP), .C3_EXP(C3_EXP)) u_thr (
    .sigma(rd.sigma), .thr_x, .thr_s
  );

  hard_threshold u_cmp (
    .x_teo, .s_teo, .thr_x, .thr_s, .det_x, .det_s, .spike
  );

  sigma_estimator u_sig (
    .s(s0), .sigma(rd.sigma), .cnt(rd.cnt), .window_end,
    .sigma_next(wr.sigma), .cnt_next(wr.cnt), .exceed
  );

  assign wr.x1 = in_x;
  assign wr.x2 = rd.x1;
  assign wr.x3 = rd.x2;

  // Result fields change only when the module is addressed, so they are
  // registered on the gated clock; valid must drop in idle cycles and is the
  // only flop on the free-running clock. No flop reads a flop of the other
  // clock, so the result does not depend on how the two clocks are ordered.
  det_out_t res_q;
  logic     valid_q;

  always_ff @(posedge mem_clk or negedge rst_n) begin
    if (!rst_n) begin
      res_q <= '0;
    end else if (active) begin
      res_q.spike     <= spike;
      res_q.det_x     <= det_x;
      res_q.det_s     <= det_s;
      res_q.sigma_upd <= window_end && (wr.sigma != rd.sigma);
      res_q.addr      <= $bits(res_q.addr)'(in_addr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= 1'b0;
    else        valid_q <= active;
  end

  always_comb begin
    out           = '0;
    out.valid     = valid_q;
    out.spike     = valid_q & res_q.spike;
    out.det_x     = valid_q & res_q.det_x;
    out.det_s     = valid_q & res_q.det_s;
    out.sigma_upd = valid_q & res_q.sigma_upd;
    out.addr      = res_q.addr;
  end

  // The shared-stream protocol never addresses a channel outside the array.
  a_addr_range : assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid |-> (int'(in_addr) < N_CH * N_MOD));
endmodule
