// control_unit: address decoding and window timing of one 32-channel module.
//
// The incoming sample stream carries a global channel address. The upper
// address bits select a module: only the module whose MODULE_ID matches is
// active for that sample, so at most one module works in any cycle (the
// modules are activated in turn). The lower bits give the local channel,
// used as the register-bank address. Channels arrive in round-robin order;
// a frame counter advances after the module's last channel, and window_end
// marks every sample of the frame that closes a WINDOW-frame window, i.e.
// the WINDOW-th sample of each of its channels since the last update.
// The paper names the control unit and its Address and Clock inputs; the
// decoding, the round-robin order and the frame counter are this design's
// choices. active, ch and window_end are combinational from the inputs and
// the frame counter; the counter updates on the clock edge.
// In the module, clk is the gated clock, which pulses exactly in the
// cycles where active (or a parameter load, or reset) is high.
module control_unit #(
  parameter int unsigned MODULE_ID  = 0,
  parameter int unsigned N_CH       = 32,   // channels in this module
  parameter int unsigned N_MOD      = 8,    // modules sharing the stream
  parameter int unsigned WIN        = 256,  // frames per sigma window
  localparam int unsigned CH_W      = $clog2(N_CH),
  localparam int unsigned MOD_W     = (N_MOD > 1) ? $clog2(N_MOD) : 1,
  localparam int unsigned ADDR_W    = $clog2(N_CH * N_MOD),
  localparam int unsigned FR_W      = $clog2(WIN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] in_addr,
  output logic              active,      // this module processes the sample
  output logic [CH_W-1:0]   ch,          // local channel index
  output logic              window_end   // sample closes a sigma window
);
  logic [FR_W-1:0] frame_q;
  logic [MOD_W-1:0] mod_sel;

  always_comb begin
    ch      = in_addr[CH_W-1:0];
    mod_sel = (N_MOD > 1) ? MOD_W'(in_addr >> CH_W) : '0;
    active  = in_valid && (mod_sel == MOD_W'(MODULE_ID));
    window_end = active && (frame_q == FR_W'(WIN - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      frame_q <= '0;
    else if (active && ch == CH_W'(N_CH - 1))
      frame_q <= (frame_q == FR_W'(WIN - 1)) ? '0 : frame_q + 1'b1;
  end
endmodule
