// tb_spiketrum_full: the encoder at its full published size, end to end.
//
// The top is used with all parameters at their defaults: 2048-point
// transforms, 696-sample segments, 40 kernels of 1353 taps, 120 output
// channels. The bench loads 40 Gammatone-shaped kernels (centre frequencies
// log-spaced from 100 Hz to 7 kHz, unit energy) and their spectra, feeds one
// segment made of three scaled, shifted kernels plus noise, and checks each
// of the codes of that segment against a floating-point matching pursuit,
// the spike of each code (channel and time) and the end of the segment at
// max_codes. Checking works as in tb_spiketrum_top. It also checks the
// throughput: consecutive codes of a segment must be at most 108,750 cycles
// apart, so that 80 codes fit in one 43.5 ms segment at a 200 MHz clock.
module tb_spiketrum_full;
  import spiketrum_pkg::*;
  localparam int N = FFT_N, S = SEG_LEN, L = KERNEL_LEN, K = NUM_KERNELS;
  localparam int LOGN = $clog2(N), MW = $clog2(K), KAW = $clog2(K * N), NCH = 3 * K;
  localparam real PI = 3.14159265358979323846;
  localparam int CODE_BUDGET = 8_700_000 / 80;   // cycles per code for 80 per segment

  logic clk = 0, rst_n = 0;
  logic feedback_en; word_t stop_threshold; logic [10:0] max_codes;
  logic td_we, fd_we; logic [KAW-1:0] td_addr, fd_addr; word_t td_data, fd_re, fd_im;
  logic audio_valid, audio_ready; word_t audio_sample;
  logic tick;
  logic [NCH-1:0] spikes;
  logic code_valid; logic [MW-1:0] code_m; logic [LOGN-1:0] code_tau; word_t code_s;
  logic seg_done, seg_stopped, spike_collision; logic [10:0] seg_codes;

  spiketrum_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, t_code = 0;
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
    repeat (20000000) @(posedge clk);
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
    real ct [N], stt [N];
    for (int i = 0; i < N; i++) begin ct[i] = $cos(2.0 * PI * i / N); stt[i] = $sin(2.0 * PI * i / N); end
    for (int m = 0; m < K; m++) begin
      f = 100.0 * (70.0 ** ($itor(m) / (K - 1)));      // centre frequency
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
          ar += v * ct[(k * n) % N];
          ai -= v * stt[(k * n) % N];
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
        if (codes > 1) begin
          // real-time budget: 80 codes per 43.5 ms segment at 200 MHz
          checks++;
          $display("code %0d after %0d cycles", codes, cyc - t_code);
          if (cyc - t_code > CODE_BUDGET) begin
            failures++; $display("code took %0d cycles, budget %0d", cyc - t_code, CODE_BUDGET);
          end
        end
        t_code = cyc;
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
    // one segment, passive, three components, three codes
    km = '{30, 12, 5}; st = '{100, -400, 350}; amp = '{0.8, 0.5, 0.3};
    run_segment(3, km, st, amp, 0.001, 1'b0, 0.01, 3, 3, 1'b0);
    $display("mechanisms: passive_end=%0d feedback_stop=%0d left_shift=%0d right_shift=%0d level1=%0d level2=%0d level3=%0d spikes=%0d",
             n_passive_end, n_fb_stop, n_left, n_right, n_level[0], n_level[1], n_level[2], n_spikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
