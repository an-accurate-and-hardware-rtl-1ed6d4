// tb_detection_module: self-checking test of one 32-channel module.
//
// Module 1 of a 2-module array (64 channels on the stream, 16-frame window
// for speed) receives a round-robin stream with idle gaps; samples for
// module 0 must leave it idle. Channels differ in noise and spike size so
// that both detector paths fire and sigma_S moves both ways; a few channels
// get their initial sigma_S loaded through the parameter port. Every
// result is compared with the integer reference model, and the output must
// appear exactly one cycle after its sample.
module tb_detection_module;
  import spike_pkg::*;
  import spike_ref_pkg::*;

  localparam int ID = 1, NMOD = 2, NCH = 32, WIN = 64;

  logic       clk = 0, rst_n = 0;
  logic       in_valid, par_we;
  logic [5:0] in_addr, par_addr;
  x_t         in_x;
  sigma_t     par_sigma;
  det_out_t   out;
  int         checks = 0, failures = 0;
  int         n_x = 0, n_s = 0, n_up = 0, n_down = 0, n_par = 0;

  ref_chan_t  model [NCH];
  src_t       src   [NCH];

  detection_module #(.MODULE_ID(ID), .N_CH(NCH), .N_MOD(NMOD), .WIN(WIN),
                     .SIGMA_INIT(sigma_t'(2 << SIG_FRAC_W))) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_addr = 0; in_x = 0; par_we = 0; par_addr = 0; par_sigma = 0;
    for (int c = 0; c < NCH; c++) begin
      ref_reset(model[c], 2 << 10);
      src[c] = '{noise_amp: 1 + (c % 8) * 2, spike_amp: 20 + (c % 5) * 12, spike_rate: 40, phase: -1};
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load sigma_S = 9.5 into channels 0, 5, 10 of this module
    for (int c = 0; c < 15; c += 5) begin
      @(negedge clk);
      par_we = 1; par_addr = 6'(ID * NCH + c); par_sigma = sigma_t'(9 * 1024 + 512);
      model[c].sigma = 9 * 1024 + 512; model[c].cnt = 0;
      n_par++;
    end
    // a load aimed at the other module must not touch this one
    @(negedge clk); par_addr = 6'(3); par_sigma = '1;
    @(negedge clk); par_we = 0;

    for (int f = 0; f < 30 * WIN; f++) begin
      for (int a = 0; a < NCH * NMOD; a++) begin
        int c, x;
        bit mine;
        ref_out_t e;
        @(negedge clk);
        if ($urandom_range(9) == 0) begin
          in_valid = 0;
          @(negedge clk);
          checks++;
          if (out.valid) begin failures++; $display("valid after idle cycle"); end
        end
        mine = (a / NCH == ID);
        c = a % NCH;
        x = mine ? src_next(src[c]) : int'($urandom_range(127)) - 64;
        in_valid = 1; in_addr = 6'(a); in_x = x_t'(x);
        if (mine) begin
          int old;
          old = model[c].sigma;
          e = ref_step(model[c], x, (f % WIN) == WIN - 1);
          if (model[c].sigma > old) n_up++;
          if (model[c].sigma < old) n_down++;
        end
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (out.valid !== mine) begin failures++; $display("valid wrong at f=%0d a=%0d", f, a); end
        else if (mine) begin
          checks++;
          if (out.spike !== e.spike || out.det_x !== e.det_x || out.det_s !== e.det_s ||
              out.sigma_upd !== e.upd || int'(out.addr) != a) begin
            failures++;
            if (failures < 20)
              $display("mismatch f=%0d ch=%0d: got s%b x%b s%b u%b exp s%b x%b s%b u%b",
                       f, c, out.spike, out.det_x, out.det_s, out.sigma_upd,
                       e.spike, e.det_x, e.det_s, e.upd);
          end
          if (e.det_x && !e.det_s) n_x++;
          if (e.det_s && !e.det_x) n_s++;
        end
      end
    end
    $display("X-only detections %0d, S-only %0d, sigma up %0d, down %0d, loads %0d",
             n_x, n_s, n_up, n_down, n_par);
    checks++;
    if (n_x == 0 || n_s == 0 || n_up == 0 || n_down == 0) begin
      failures++; $display("a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
