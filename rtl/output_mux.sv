// output_mux: time-domain multiplexer of the module results.
//
// Each 32-channel module registers its result for the sample it processed
// in the previous cycle. Because only one module is active per cycle, the
// module index of the previous sample (sel, registered by the top) picks the
// one result that is valid, and the 1-bit spike stream with its channel
// address leaves the chip one result per cycle. The paper gives the
// multiplexer and the 1-bit output stream; selecting by the registered
// module index is this design's choice. Combinational; an assertion checks
// that no two modules report in the same cycle.
module output_mux
  import spike_pkg::*;
#(
  parameter int unsigned N_MOD = N_MODULES,
  localparam int unsigned SEL_W = (N_MOD > 1) ? $clog2(N_MOD) : 1
) (
  input  logic             clk,   // assertion sampling only
  input  logic             rst_n,
  input  det_out_t         mod_out [N_MOD],
  input  logic [SEL_W-1:0] sel,
  output det_out_t         out
);
  logic [N_MOD-1:0] valids;

  always_comb begin
    for (int i = 0; i < N_MOD; i++) valids[i] = mod_out[i].valid;
    out = (int'(sel) < N_MOD) ? mod_out[sel] : '0;
  end

  a_one_module : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(valids));
  a_sel_match  : assert property (@(posedge clk) disable iff (!rst_n)
                                  (valids != '0) |-> out.valid);
endmodule
