// tb_dual_spike_detector: end-to-end test of the 256-channel detector at its
// default size (8 modules x 32 channels, 256-frame sigma window).
//
// A synthetic 256-channel recording (noise levels and spike sizes differing
// from channel to channel) streams in round robin, one sample per cycle
// with occasional idle cycles. A few channels get their initial sigma_S
// loaded first. Every result on the output stream is checked against the
// integer reference model: it must come one cycle after its sample, carry
// the right channel address, the right spike bit and path flags, and the
// right sigma-update flag. The run covers 24 complete sigma windows (1.6 million samples).
// It also counts how often each mechanism occurred: X-path-only, S-path-only
// and two-path detections, sigma_S rising and falling, parameter loads,
// idle cycles and activity of each of the eight modules; one that never
// occurred is a failure.
module tb_dual_spike_detector;
  import spike_pkg::*;
  import spike_ref_pkg::*;

  localparam int NCH = 256, WIN = 256, N_WIN = 24;

  logic       clk = 0, rst_n = 0;
  logic       in_valid, par_we;
  logic [7:0] in_addr, par_addr;
  logic [6:0] in_x;
  logic [14:0] par_sigma;
  logic       spike_valid, spike, spike_x, spike_s, sigma_upd;
  logic [7:0] spike_addr;
  int         checks = 0, failures = 0;
  int         n_x = 0, n_s = 0, n_xs = 0, n_up = 0, n_down = 0, n_par = 0, n_idle = 0;
  int         n_spk_out = 0;
  int         n_mod [8];

  ref_chan_t  model [NCH];
  src_t       src   [NCH];

  dual_spike_detector dut (.*);

  always #125 clk = ~clk;  // 4 MHz

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_addr = 0; in_x = 0; par_we = 0; par_addr = 0; par_sigma = 0;
    foreach (n_mod[i]) n_mod[i] = 0;
    for (int c = 0; c < NCH; c++) begin
      ref_reset(model[c], 2 << 10);
      src[c] = '{noise_amp: 1 + (c % 13), spike_amp: 16 + (c % 7) * 8,
                 spike_rate: 50 + (c % 3) * 30, phase: -1};
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // initial sigma_S = 12.25 for every 37th channel
    for (int c = 0; c < NCH; c += 37) begin
      @(negedge clk);
      par_we = 1; par_addr = 8'(c); par_sigma = 15'(12 * 1024 + 256);
      model[c].sigma = 12 * 1024 + 256; model[c].cnt = 0;
      n_par++;
    end
    @(negedge clk); par_we = 0;

    for (int f = 0; f < N_WIN * WIN; f++) begin
      for (int a = 0; a < NCH; a++) begin
        int x, old;
        ref_out_t e;
        @(negedge clk);
        if ($urandom_range(63) == 0) begin
          in_valid = 0; in_addr = 8'($urandom); n_idle++;
          @(negedge clk);
          checks++;
          if (spike_valid) begin failures++; $display("output after idle cycle"); end
        end
        x = src_next(src[a]);
        in_valid = 1; in_addr = 8'(a); in_x = 7'(x);
        old = model[a].sigma;
        e = ref_step(model[a], x, (f % WIN) == WIN - 1);
        if (model[a].sigma > old) n_up++;
        if (model[a].sigma < old) n_down++;
        n_mod[a / 32]++;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!spike_valid || spike_addr !== 8'(a) || spike !== e.spike || spike_x !== e.det_x ||
            spike_s !== e.det_s || sigma_upd !== e.upd) begin
          failures++;
          if (failures < 20)
            $display("mismatch f=%0d ch=%0d: v%b a%0d s%b x%b s%b u%b, expected s%b x%b s%b u%b",
                     f, a, spike_valid, spike_addr, spike, spike_x, spike_s, sigma_upd,
                     e.spike, e.det_x, e.det_s, e.upd);
        end
        if (e.spike) n_spk_out++;
        if (e.det_x && !e.det_s) n_x++;
        if (e.det_s && !e.det_x) n_s++;
        if (e.det_s && e.det_x)  n_xs++;
      end
    end

    $display("detections %0d: X-only %0d, S-only %0d, both %0d", n_spk_out, n_x, n_s, n_xs);
    $display("sigma rises %0d, falls %0d, loads %0d, idle cycles %0d", n_up, n_down, n_par, n_idle);
    foreach (n_mod[i]) $display("module %0d processed %0d samples", i + 1, n_mod[i]);
    begin
      int mins [$];
      mins = '{n_x, n_s, n_xs, n_up, n_down, n_par, n_idle};
      foreach (mins[i]) begin
        checks++;
        if (mins[i] == 0) begin failures++; $display("mechanism %0d never occurred", i); end
      end
      foreach (n_mod[i]) begin
        checks++;
        if (n_mod[i] == 0) begin failures++; $display("module %0d never active", i); end
      end
    end
    // sigma_S of a loud and a quiet channel after adaptation
    $display("sigma_S: channel 12 %0.3f, channel 13 %0.3f",
             real'(model[12].sigma) / 1024.0, real'(model[13].sigma) / 1024.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
