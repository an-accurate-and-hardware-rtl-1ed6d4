// tb_output_mux: self-checking test of the output multiplexer.
//
// Each cycle one random module (or none) presents a random valid result and
// the others present idle results; sel names that module. The output must
// equal the selected input exactly.
module tb_output_mux;
  import spike_pkg::*;

  logic       clk = 0, rst_n = 0;
  det_out_t   mod_out [8];
  logic [2:0] sel;
  det_out_t   out;
  int         checks = 0, failures = 0;

  output_mux #(.N_MOD(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    det_out_t exp_o;
    foreach (mod_out[i]) mod_out[i] = '0;
    sel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int m;
      @(negedge clk);
      m = int'($urandom_range(7));
      foreach (mod_out[i]) begin
        mod_out[i] = det_out_t'($urandom);
        mod_out[i].valid = 1'b0;
      end
      if ($urandom_range(4) != 0) mod_out[m].valid = 1'b1;
      sel = 3'(m);
      exp_o = mod_out[m];
      #1;
      checks++;
      if (out !== exp_o) begin failures++; $display("mux mismatch sel=%0d", m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
