// tb_spiketrum_controller: self-checking test of the encoder sequencer.
// The controller (N = 16, 5-sample segments, 3 kernels) runs against simple
// behavioural stand-ins: a forward transform that takes N samples and, some
// cycles later, returns N outputs; a streaming inverse transform that returns
// every input a fixed 30 cycles later; a code generator that answers `finish`
// one cycle later; a feedback unit whose stop decision the bench chooses;
// a shifter that reports done after a while. The bench counts, per code and
// per segment, the audio samples accepted, zero-fill writes, FFT input
// samples, complex-multiplier inputs, code-generator inputs, shifter starts
// and codes, checks that each kernel's spectrum is read for one whole frame
// and that the inverse-transform outputs are labelled with the right kernel,
// and checks all counts against the sequence the controller must follow, in passive mode (ends at max_codes) and active mode (ends on stop).
module tb_spiketrum_controller;
  localparam int N = 16, S = 5, K = 3, LOGN = 4, MW = 2, FDAW = 6;
  logic clk = 0, rst_n = 0;
  logic [7:0] max_codes;
  logic audio_valid, audio_ready, sig_we, sig_wzero, res_active;
  logic [LOGN-1:0] sig_addr, fft_out_idx, fftram_raddr, ifft_out_idx;
  logic fft_in_ready, fft_in_valid, fft_out_valid, fftram_store, cm_in_valid;
  logic [FDAW-1:0] fdrom_raddr;
  logic ifft_in_ready, ifft_out_valid, cg_clear, cg_in_valid, cg_finish, code_valid;
  logic [MW-1:0] cur_m;
  logic fb_valid, fb_stop, shift_start, shift_done, seg_done, seg_stopped;
  logic [7:0] seg_codes;
  int checks = 0, failures = 0;

  spiketrum_controller #(.N(N), .SEG_LEN(S), .NUM_K(K), .CODE_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --- behavioural transform core: N inputs, 20 cycles, N outputs
  task automatic xform(ref logic ready, ref logic ovalid, ref logic [LOGN-1:0] oidx, input bit which);
    int n;
    forever begin
      ready = 1; n = 0;
      while (n < N) begin
        @(negedge clk);
        if (which ? cm_v_d[9] : fft_in_valid) n++;
      end
      @(posedge clk); #1 ready = 0;
      repeat (20) @(posedge clk);
      for (int i = 0; i < N; i++) begin
        @(posedge clk); #1 ovalid = 1; oidx = LOGN'(i);
      end
      @(posedge clk); #1 ovalid = 0;
    end
  endtask
  logic [9:0] cm_v_d;   // complex multiplier latency
  always @(posedge clk) cm_v_d <= rst_n ? {cm_v_d[8:0], cm_in_valid} : '0;
  initial begin fft_out_valid = 0; fft_out_idx = 0; fft_in_ready = 0; @(posedge rst_n); xform(fft_in_ready, fft_out_valid, fft_out_idx, 0); end
  // --- behavioural streaming inverse transform: fixed 30-cycle delay
  logic [29:0] if_v_d;
  logic [LOGN-1:0] if_cnt;
  always @(posedge clk) begin
    if_v_d <= rst_n ? {if_v_d[28:0], cm_v_d[9]} : '0;
    if (!rst_n) if_cnt <= '0;
    else if (if_v_d[29]) if_cnt <= if_cnt + 1'b1;
  end
  assign ifft_out_valid = if_v_d[29];
  assign ifft_out_idx   = if_cnt;
  assign ifft_in_ready  = (if_v_d == '0) && (cm_v_d == '0);

  // --- code generator, feedback, shifter stand-ins
  bit stop_at [int];
  int code_no = 0;
  always @(posedge clk) begin
    code_valid <= rst_n && cg_finish;
    fb_valid   <= rst_n && code_valid;
    if (rst_n && code_valid) begin
      code_no++;
      fb_stop <= stop_at.exists(code_no);
    end
  end
  initial begin
    shift_done = 0;
    forever begin
      @(posedge clk); #1;
      if (shift_start) begin repeat (30) @(posedge clk); #1 shift_done = 1; @(posedge clk); #1 shift_done = 0; end
    end
  end

  // --- counters
  logic [FDAW-1:0] fd_q;   // spectrum address of the read now arriving
  always @(posedge clk) fd_q <= fdrom_raddr;
  int n_audio, n_zero, n_fftin, n_cm, n_cg, n_shift, n_codes, n_store, n_clear, n_finish;
  int m_seen [K], m_read [K];
  logic [MW-1:0] exp_m;   // kernel of the current inverse-transform output
  always @(posedge clk) begin
    if (!rst_n || cg_clear) exp_m <= '0;
    else if (cg_in_valid && ifft_out_idx == LOGN'(N-1)) exp_m <= exp_m + 1'b1;
  end
  always @(posedge clk) if (rst_n) begin
    if (audio_valid && audio_ready) n_audio++;
    if (sig_we && sig_wzero) n_zero++;
    if (fft_in_valid) n_fftin++;
    if (cm_in_valid) begin n_cm++; m_read[fd_q / N]++; end
    if (cg_in_valid) begin
      n_cg++; m_seen[cur_m]++;
      if (cur_m != exp_m) begin checks++; failures++; $display("output labelled kernel %0d, expected %0d", cur_m, exp_m); end
    end
    if (shift_start) n_shift++;
    if (code_valid) n_codes++;
    if (fftram_store) n_store++;
    if (cg_clear) n_clear++;
    if (cg_finish) n_finish++;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d, expected %0d", what, got, exp); end
  endtask

  task automatic segment(int maxc, int exp_codes, bit exp_stop);
    n_audio = 0; n_zero = 0; n_fftin = 0; n_cm = 0; n_cg = 0; n_shift = 0; n_codes = 0;
    n_store = 0; n_clear = 0; n_finish = 0; m_seen = '{0, 0, 0}; m_read = '{0, 0, 0};
    max_codes = 8'(maxc);
    @(posedge clk); #1;          // past the previous seg_done pulse
    audio_valid = 1;
    while (!seg_done) begin
      @(posedge clk); #1;
      if (n_audio == S) audio_valid = 0;
    end
    audio_valid = 0;
    check("audio samples", n_audio, S);
    check("zero-fill writes", n_zero, N - S);
    check("codes", n_codes, exp_codes);
    check("seg_codes", seg_codes, exp_codes);
    check("seg_stopped", seg_stopped, exp_stop);
    check("FFT inputs", n_fftin, N * exp_codes);
    check("FFT RAM writes", n_store, N * exp_codes);
    check("multiplier inputs", n_cm, N * K * exp_codes);
    for (int m = 0; m < K; m++) check("spectrum reads of one kernel", m_read[m], N * exp_codes);
    for (int m = 0; m < K; m++) check("outputs labelled with one kernel", m_seen[m], N * exp_codes);
    check("code generator inputs", n_cg, N * K * exp_codes);
    check("searches", n_clear, exp_codes);
    check("finish", n_finish, exp_codes);
    check("shifter starts", n_shift, exp_codes - 1);
  endtask

  // audio_ready must stay low while the segment is being encoded
  always @(posedge clk) if (rst_n && audio_ready && (n_codes > 0 && !seg_done)) begin
    checks++; failures++; $display("audio accepted during encoding");
  end

  initial begin
    max_codes = 4; audio_valid = 0; fb_stop = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    segment(4, 4, 1'b0);                 // passive: runs to max_codes
    stop_at[6] = 1;                      // code 2 of the next segment stops it
    segment(5, 2, 1'b1);
    stop_at[7] = 1;                      // first code stops
    segment(5, 1, 1'b1);
    segment(2, 2, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
