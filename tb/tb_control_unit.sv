// tb_control_unit: self-checking test of address decoding and window timing.
//
// Module 3 of 8 (32 channels each, 4-frame window) watches a round-robin
// stream over all 256 channels with random idle cycles. The test keeps its
// own frame count and checks active, the local channel and window_end on
// every sample, and that window_end appears once per channel per window.
module tb_control_unit;
  localparam int ID = 3, NCH = 32, NMOD = 8, WIN = 4;

  logic       clk = 0, rst_n = 0;
  logic       in_valid;
  logic [7:0] in_addr;
  logic       active, window_end;
  logic [4:0] ch;
  int         checks = 0, failures = 0;
  int         frame = 0, n_we = 0;

  control_unit #(.MODULE_ID(ID), .N_CH(NCH), .N_MOD(NMOD), .WIN(WIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3 * WIN; f++) begin
      for (int a = 0; a < NCH * NMOD; a++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin   // idle cycle
          in_valid = 0; in_addr = 8'($urandom);
          #1;
          checks++;
          if (active || window_end) begin failures++; $display("active while idle"); end
          @(negedge clk);
        end
        in_valid = 1; in_addr = 8'(a);
        #1;
        checks += 3;
        if (active !== (a / NCH == ID)) begin failures++; $display("active wrong at %0d", a); end
        if (ch !== 5'(a % NCH))          begin failures++; $display("ch wrong at %0d", a); end
        if (window_end !== ((a / NCH == ID) && (frame % WIN == WIN - 1))) begin
          failures++; $display("window_end wrong at frame %0d addr %0d", frame, a);
        end
        if (window_end) n_we++;
      end
      frame++;
    end
    @(negedge clk); in_valid = 0;
    checks++;
    if (n_we != 3 * NCH) begin failures++; $display("window_end count %0d", n_we); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
