// tb_spiketrum_top: end-to-end test of the Spiketrum encoder.
//
// Default size: 64-point transform, 22-sample segments, 43-tap kernels and 4
// kernels (the published core uses 2048 / 696 / 1353 / 40; the full-size run
// is tb_spiketrum_full). The bench builds Gammatone-shaped kernels of unit
// energy, loads their taps into the time-domain kernel memory and the DFT of
// each time-reversed, zero-padded kernel into the frequency-domain memory,
// then feeds segments made of scaled, shifted kernels plus a little noise.
//
// Reference: a floating-point matching pursuit on the same quantised
// samples. For every code the hardware emits, the bench checks that its
// intensity equals the true correlation at the hardware's (m, tau) and that
// no other (m, tau) correlates noticeably better; the model then removes the
// hardware's choice, so fixed-point near-ties cannot make the two diverge.
// After every code it checks the spike: channel 3*m + nearest level, tau+3
// cycles after code_valid is seen (tick every cycle). Per segment it checks the number
// of codes and why the segment ended. The residual left in the model after
// the last code is checked through the next code's intensity. Mechanisms counted (each must occur): passive end
// at max_codes, feedback stop, left and right kernel shifts, each of the
// three intensity levels, and spikes.
module tb_spiketrum_top;
  import spiketrum_pkg::*;
  parameter int N = 64, S = 22, L = 43, K = 4;
  localparam int LOGN = $clog2(N), MW = $clog2(K), KAW = $clog2(K * N), NCH = 3 * K;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic feedback_en; word_t stop_threshold; logic [10:0] max_codes;
  logic td_we, fd_we; logic [KAW-1:0] td_addr, fd_addr; word_t td_data, fd_re, fd_im;
  logic audio_valid, audio_ready; word_t audio_sample;
  logic tick;
  logic [NCH-1:0] spikes;
  logic code_valid; logic [MW-1:0] code_m; logic [LOGN-1:0] code_tau; word_t code_s;
  logic seg_done, seg_stopped, spike_collision; logic [10:0] seg_codes;

  spiketrum_top #(.N(N), .SEG(S), .L(L), .NUM_K(K)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_passive_end = 0, n_fb_stop = 0, n_left = 0, n_right = 0, n_spikes = 0;
  int n_level [3] = '{0, 0, 0};
  real phi [K][L];
  real x [S];
  always @(posedge clk) cyc <= cyc + 1;

  // expected spikes, checked as they appear
  typedef struct { int ch; int t; } spk_t;
  spk_t exp_q [$];
  always @(posedge clk) begin
    #1;
    if (spikes != '0) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected spike %h", spikes);
      end else if (!spikes[exp_q[0].ch] || $countones(spikes) != 1 || cyc != exp_q[0].t) begin
        failures++; $display("spike %h at %0d, expected ch %0d at %0d", spikes, cyc, exp_q[0].ch, exp_q[0].t);
        void'(exp_q.pop_front());
      end else begin
        n_spikes++;
        void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rl(word_t v); return $itor(v) / (2.0 ** FRAC_BITS); endfunction
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  // correlation of the model segment with kernel m placed at time index tau
  function automatic real corr(int m, int tau);
    real acc = 0.0;
    for (int n = 0; n < S; n++) begin
      int k = n - tau + (L - 1);
      if (k >= 0 && k < L) acc += x[n] * phi[m][k];
    end
    return acc;
  endfunction

  task automatic build_kernels();
    real fs = 16000.0, f, b, e, t, v, ar, ai;
    real q [L];
    for (int m = 0; m < K; m++) begin
      f = 1500.0 + 1500.0 * m;                        // centre frequency
      b = 1.019 * 24.7 * (4.37 * f / 1000.0 + 1.0);   // ERB bandwidth
      e = 0.0;
      for (int i = 0; i < L; i++) begin
        t = $itor(i + 1) / fs;
        phi[m][i] = (t ** 3) * $exp(-2.0 * PI * b * t) * $cos(2.0 * PI * f * t);
        e += phi[m][i] ** 2;
      end
      for (int i = 0; i < L; i++) begin
        phi[m][i] = rl(to_fixed(phi[m][i] / $sqrt(e)));
        q[i] = phi[m][i];
      end
      // time-domain taps
      for (int i = 0; i < N; i++) begin
        @(negedge clk); td_we = 1; td_addr = KAW'(m * N + i);
        td_data = (i < L) ? to_fixed(q[i]) : '0;
      end
      // spectrum of the time-reversed, zero-padded kernel
      for (int k = 0; k < N; k++) begin
        ar = 0.0; ai = 0.0;
        for (int n = 0; n < L; n++) begin
          v = q[L - 1 - n];
          ar += v * $cos(2.0 * PI * ((k * n) % N) / N);
          ai -= v * $sin(2.0 * PI * ((k * n) % N) / N);
        end
        @(negedge clk); td_we = 0; fd_we = 1; fd_addr = KAW'(m * N + k);
        fd_re = to_fixed(ar); fd_im = to_fixed(ai);
      end
      @(negedge clk); td_we = 0; fd_we = 0;
    end
  endtask

  // One segment: x = sum of amp[j] * kernel km[j] starting at sample st[j], + noise.
  task automatic run_segment(int ncomp, int km [3], int st [3], real amp [3], real noise,
                             bit fb, real thr, int maxc, int exp_codes, bit exp_stop);
    int codes, lvl, ch, n_below; bit early_ok;
    real c [3], bestv, d, hv, y;
    c[0] = 0.0065; c[1] = 0.4115; c[2] = 25.8744;
    for (int n = 0; n < S; n++) begin
      x[n] = noise * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0);
      for (int j = 0; j < ncomp; j++) begin
        int k = n - st[j];
        if (k >= 0 && k < L) x[n] += amp[j] * phi[km[j]][k];
      end
      x[n] = rl(to_fixed(x[n]));
    end
    feedback_en = fb; stop_threshold = to_fixed(thr); max_codes = 11'(maxc);
    for (int n = 0; n < S; n++) begin
      @(negedge clk);
      while (!audio_ready) @(negedge clk);
      audio_valid = 1; audio_sample = to_fixed(x[n]);
      @(negedge clk); audio_valid = 0;
    end
    codes = 0; n_below = 0; early_ok = 1;
    forever begin
      @(posedge clk); #1;
      if (code_valid) begin
        codes++;
        // intensity at the hardware's choice, and the best of the model
        hv = corr(code_m, code_tau);
        bestv = -1.0e9;
        for (int m = 0; m < K; m++) for (int tt = 0; tt < N; tt++) begin
          y = corr(m, tt); if (y > bestv) bestv = y;
        end
        checks++;
        if (fabs(rl(code_s) - hv) > 1.0e-4 * (1.0 + fabs(hv)) || hv < bestv - 1.0e-4 * (1.0 + fabs(bestv))) begin
          failures++;
          $display("code %0d: hw m%0d tau%0d s=%f, model there %f, model best %f", codes, code_m, code_tau, rl(code_s), hv, bestv);
        end
        if (int'(code_tau) < L - 1) n_left++; else n_right++;
        // model update with the hardware's code
        for (int n = 0; n < S; n++) begin
          int k = n - int'(code_tau) + (L - 1);
          if (k >= 0 && k < L) x[n] -= rl(code_s) * phi[code_m][k];
        end
        // spike
        lvl = 0; d = fabs(rl(code_s) - c[0]);
        for (int j = 1; j < 3; j++) if (fabs(rl(code_s) - c[j]) < d) begin d = fabs(rl(code_s) - c[j]); lvl = j; end
        ch = 3 * int'(code_m) + lvl;
        n_level[lvl]++;
        exp_q.push_back('{ch: ch, t: cyc + int'(code_tau) + 3});
        if (fb && rl(code_s) < thr) n_below++;
        if (codes < maxc && !(fb && rl(code_s) < thr)) early_ok = 1; else early_ok = 0;
      end
      if (seg_done) break;
    end
    repeat (N + 8) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d spikes missing", exp_q.size()); exp_q.delete(); end
    checks++;
    // the segment must end exactly at the first code below the threshold
    // (active mode) or at max_codes, whichever comes first
    if (early_ok || n_below > 1 || int'(seg_codes) != codes || seg_stopped != (n_below == 1) ||
        (exp_codes > 0 && codes != exp_codes) || seg_stopped != exp_stop) begin
      failures++; $display("segment: %0d codes (reg %0d), stopped %0d, below %0d", codes, seg_codes, seg_stopped, n_below);
    end
    if (seg_stopped) n_fb_stop++; else n_passive_end++;
    $display("segment done at cycle %0d: %0d codes", cyc, codes);
  endtask

  initial begin
    int km [3]; int st [3]; real amp [3];
    feedback_en = 0; stop_threshold = '0; max_codes = 11'd4;
    td_we = 0; fd_we = 0; td_addr = '0; fd_addr = '0; td_data = '0; fd_re = '0; fd_im = '0;
    audio_valid = 0; audio_sample = '0; tick = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    build_kernels();
    // 1: passive, two components, one starting before the segment
    km = '{1, 3, 0}; st = '{5, -10, 0}; amp = '{0.9, 0.4, 0.0};
    run_segment(2, km, st, amp, 0.002, 1'b0, 0.01, 6, 6, 1'b0);
    // 2: active, one component; stops when a code falls below the threshold
    km = '{0, 0, 0}; st = '{3, 0, 0}; amp = '{0.3, 0.0, 0.0};
    run_segment(1, km, st, amp, 0.0005, 1'b1, 0.01, 8, 0, 1'b1);
    // 3: loud component (highest intensity level), passive, two codes
    km = '{2, 0, 0}; st = '{2, 0, 0}; amp = '{20.0, 0.0, 0.0};
    run_segment(1, km, st, amp, 0.001, 1'b0, 0.01, 2, 2, 1'b0);
    // 4: active with a high threshold: the first code already stops
    km = '{3, 0, 0}; st = '{0, 0, 0}; amp = '{0.2, 0.0, 0.0};
    run_segment(1, km, st, amp, 0.001, 1'b1, 1.0, 8, 1, 1'b1);
    $display("mechanisms: passive_end=%0d feedback_stop=%0d left_shift=%0d right_shift=%0d level1=%0d level2=%0d level3=%0d spikes=%0d",
             n_passive_end, n_fb_stop, n_left, n_right, n_level[0], n_level[1], n_level[2], n_spikes);
    checks++;
    if (n_passive_end == 0 || n_fb_stop == 0 || n_left == 0 || n_right == 0 ||
        n_level[0] == 0 || n_level[1] == 0 || n_level[2] == 0 || n_spikes == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
