// tb_memory_bank: self-checking test of the per-channel register banks.
//
// Checks the reset contents, then runs random datapath writes and parameter
// loads (including both to the same channel in one cycle, where the load
// must win for sigma_S and the counter) against a model array kept here,
// comparing the combinational read port every cycle.
module tb_memory_bank;
  import spike_pkg::*;

  localparam int DEPTH = 32;
  localparam sigma_t INIT = sigma_t'(3 << SIG_FRAC_W);

  logic        clk = 0, rst_n = 0;
  logic [4:0]  rd_addr, wr_addr, par_addr;
  chan_state_t rd_data, wr_data;
  logic        wr_en, par_we;
  sigma_t      par_sigma;
  int          checks = 0, failures = 0;
  chan_state_t model [DEPTH];

  memory_bank #(.DEPTH(DEPTH), .SIGMA_INIT(INIT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; par_we = 0; rd_addr = 0; wr_addr = 0; par_addr = 0;
    wr_data = '0; par_sigma = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = '{x1: '0, x2: '0, x3: '0, sigma: INIT, cnt: '0};
      rd_addr = 5'(i); #1;
      checks++;
      if (rd_data !== model[i]) begin failures++; $display("reset value wrong at %0d", i); end
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      wr_en     = $urandom_range(3) != 0;
      wr_addr   = 5'($urandom_range(DEPTH - 1));
      wr_data   = chan_state_t'({$urandom, $urandom});
      par_we    = $urandom_range(7) == 0;
      par_addr  = (n % 5 == 0) ? wr_addr : 5'($urandom_range(DEPTH - 1));
      par_sigma = sigma_t'($urandom);
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      if (par_we) begin
        model[par_addr].sigma = par_sigma;
        model[par_addr].cnt   = '0;
      end
      #1;
      rd_addr = 5'($urandom_range(DEPTH - 1));
      #1;
      checks++;
      if (rd_data !== model[rd_addr]) begin
        failures++;
        $display("read mismatch at %0d: %h vs %h", rd_addr, rd_data, model[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
