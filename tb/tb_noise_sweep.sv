// tb_noise_sweep: detection accuracy against noise level, on the full-size
// detector.
//
// Each of the eight 32-channel modules gets recordings at one noise level:
// 0.05, 0.10, ... 0.40, where the level is the noise standard deviation over
// the spike peak magnitude (40 LSB of the 7-bit range). The noise is close
// to Gaussian (Irwin-Hall sum of 12 uniforms); spikes are biphasic, at
// random times at least 12 samples apart, about one per 80 samples. Each
// channel's initial sigma_S is loaded through the parameter port with a
// calibrated value, half the noise standard deviation (the loop's
// equilibrium for Gaussian noise, see below), and then adapts on its own;
// starting every channel from the same value would take tens of windows to
// settle at the high noise levels.
//
// After a warm-up of 8 sigma windows, rising edges of each channel's spike
// bit are matched against the true spike onsets: an edge within [-1, +9]
// samples of an unmatched onset is a true positive (TP), any other edge is a
// false positive (FP), and an onset that no edge claimed is a miss (FN).
// Accuracy = TP / (TP + FP + FN), the usual definition for this task. The
// test prints the accuracy per level and fails if it falls below a floor
// at the levels up to 0.2 (the range of standard spike-sorting benchmark
// recordings). The floors are set with margin below what this design
// achieves; they catch a broken detector, not a small loss in quality.
module tb_noise_sweep;
  import spike_pkg::*;

  localparam int NCH = 256, WIN = 256, WARM = 8, N_WIN = 24;
  localparam int AMP = 40;
  localparam real LEVEL [8] = '{0.05, 0.10, 0.15, 0.20, 0.25, 0.30, 0.35, 0.40};
  localparam real FLOOR [8] = '{0.90, 0.90, 0.85, 0.75, 0.0, 0.0, 0.0, 0.0};
  localparam int SHAPE [8] = '{0, -20, -56, -64, -30, 18, 24, 10};

  logic        clk = 0, rst_n = 0;
  logic        in_valid, par_we;
  logic [7:0]  in_addr, par_addr;
  logic [6:0]  in_x;
  logic [14:0] par_sigma;
  logic        spike_valid, spike, spike_x, spike_s, sigma_upd;
  logic [7:0]  spike_addr;
  int          checks = 0, failures = 0;

  int phase [NCH];       // position in the current spike, -1 = none
  int since [NCH];       // samples since the last onset
  int k_ch  [NCH];       // samples delivered per channel
  // index p: 0 = detector output, 1 = X path alone, 2 = S path alone
  bit prev  [3][NCH];    // previous bit per channel
  int onsets[3][NCH][$]; // unmatched true onsets
  int tp [3][8], fp [3][8], fn [3][8];

  dual_spike_detector dut (.*);

  always #125 clk = ~clk;

  function automatic real gauss();
    real acc = 0.0;
    for (int i = 0; i < 12; i++) acc += real'($urandom) / 4294967296.0;
    return acc - 6.0;
  endfunction

  function automatic int next_sample(int c);
    real v = gauss() * LEVEL[c / 32] * AMP;
    int  iv;
    since[c]++;
    if (phase[c] < 0 && since[c] > 12 && $urandom_range(79) == 0) begin
      phase[c] = 0;
      since[c] = 0;
      for (int p = 0; p < 3; p++) onsets[p][c].push_back(k_ch[c]);
    end
    if (phase[c] >= 0) begin
      v += real'(SHAPE[phase[c]] * AMP) / 64.0;
      phase[c] = (phase[c] == 7) ? -1 : phase[c] + 1;
    end
    iv = int'(v);
    return (iv > 63) ? 63 : (iv < -64) ? -64 : iv;
  endfunction

  // Score the detection bit of sample k-1 of channel c.
  task automatic score(int p, int c, bit bit_now, int k);
    int  e = k - 1;
    int  g = c / 32;
    bit  measure = (e >= WARM * WIN);
    // onsets too old to be claimed any more are misses
    while (onsets[p][c].size() > 0 && onsets[p][c][0] + 9 < e) begin
      if (onsets[p][c][0] >= WARM * WIN) fn[p][g]++;
      void'(onsets[p][c].pop_front());
    end
    if (bit_now && !prev[p][c]) begin
      if (onsets[p][c].size() > 0 && onsets[p][c][0] - 1 <= e && e <= onsets[p][c][0] + 9) begin
        if (onsets[p][c][0] >= WARM * WIN) tp[p][g]++;
        void'(onsets[p][c].pop_front());
      end else if (measure) fp[p][g]++;
    end
    prev[p][c] = bit_now;
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_addr = 0; in_x = 0; par_we = 0; par_addr = 0; par_sigma = 0;
    for (int c = 0; c < NCH; c++) begin
      phase[c] = -1; since[c] = 100; k_ch[c] = 0;
      for (int p = 0; p < 3; p++) prev[p][c] = 0;
    end
    for (int p = 0; p < 3; p++)
      for (int g = 0; g < 8; g++) begin tp[p][g] = 0; fp[p][g] = 0; fn[p][g] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // S = (X[k]+X[k-1])/4 has std ~0.354*std_X, and 20 of 256 samples lie
    // above ~1.42 std, so sigma_S settles near 0.5*std_X.
    for (int c = 0; c < NCH; c++) begin
      @(negedge clk);
      par_we = 1; par_addr = 8'(c);
      par_sigma = 15'(int'(0.5 * LEVEL[c / 32] * AMP * 1024.0));
    end
    @(negedge clk) par_we = 0;

    for (int f = 0; f < N_WIN * WIN; f++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        in_valid = 1; in_addr = 8'(c); in_x = 7'(next_sample(c));
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!spike_valid || spike_addr !== 8'(c)) begin
          failures++;
          $display("no result for channel %0d", c);
        end
        score(0, c, spike, k_ch[c]);
        score(1, c, spike_x, k_ch[c]);
        score(2, c, spike_s, k_ch[c]);
        k_ch[c]++;
      end
    end

    for (int g = 0; g < 8; g++) begin
      real acc [3];
      for (int p = 0; p < 3; p++) begin
        int tot;
        tot = tp[p][g] + fp[p][g] + fn[p][g];
        acc[p] = (tot > 0) ? real'(tp[p][g]) / real'(tot) : 0.0;
      end
      $display("noise level %0.2f: TP %0d FP %0d FN %0d accuracy %0.3f  (X path alone %0.3f, S path alone %0.3f)",
               LEVEL[g], tp[0][g], fp[0][g], fn[0][g], acc[0], acc[1], acc[2]);
      if (FLOOR[g] > 0.0) begin
        checks++;
        if (acc[0] < FLOOR[g]) begin
          failures++;
          $display("accuracy below %0.2f at noise level %0.2f", FLOOR[g], LEVEL[g]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
