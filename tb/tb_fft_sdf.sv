// tb_fft_sdf: self-checking test of the pipelined streaming FFT / IFFT.
// A 64-point core receives bursts of back-to-back frames of random complex
// data: two scaled forward transforms (expected X[k]/N), then three unscaled
// inverse transforms, then a single scaled forward frame. Every output is
// compared, at the index out_idx names, with a direct DFT computed here in
// floating point. The bench also checks that each output index appears once
// per frame, that the outputs of a burst are contiguous (one per cycle), that
// the first output leaves N-1+2*log2(N) cycles after the first input, and
// that in_ready returns once the burst has left the core.
module tb_fft_sdf;
  localparam int N = 64, W = 34, LOGN = 6, FRAC = 26, MAXF = 3;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic inverse, scale, in_valid, in_ready, out_valid, busy;
  logic signed [W-1:0] in_re, in_im, out_re, out_im;
  logic [LOGN-1:0] out_idx;
  int checks = 0, failures = 0;
  real xr [MAXF][N], xi [MAXF][N], er [MAXF][N], ei [MAXF][N];
  int cyc = 0, t_first_in, t_first_out;

  fft_sdf #(.N(N), .DATA_W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [W-1:0] fx(real v);
    return W'(longint'(v * (2.0 ** FRAC)));
  endfunction
  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real rl(logic signed [W-1:0] v);
    return $itor(v) / (2.0 ** FRAC);
  endfunction

  task automatic burst(bit inv, bit sc, real amp, int nf);
    real sgn, a, tol;
    int n_out, f, prev_cyc;
    bit seen [N];
    sgn = inv ? 1.0 : -1.0;
    for (f = 0; f < nf; f++) begin
      for (int n = 0; n < N; n++) begin
        xr[f][n] = rl(fx(amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0)));
        xi[f][n] = rl(fx(amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0)));
      end
      for (int k = 0; k < N; k++) begin
        er[f][k] = 0; ei[f][k] = 0;
        for (int n = 0; n < N; n++) begin
          a = 2.0 * PI * ((k * n) % N) / N;
          er[f][k] += xr[f][n] * $cos(a) - sgn * xi[f][n] * $sin(a);
          ei[f][k] += sgn * xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
        end
        if (sc) begin er[f][k] /= N; ei[f][k] /= N; end
      end
    end
    wait (in_ready);
    @(negedge clk);
    inverse = inv; scale = sc;
    fork
      begin
        for (int ff = 0; ff < nf; ff++)
          for (int n = 0; n < N; n++) begin
            if (ff == 0 && n == 0) t_first_in = cyc;
            in_valid = 1; in_re = fx(xr[ff][n]); in_im = fx(xi[ff][n]);
            @(negedge clk);
          end
        in_valid = 0;
      end
      begin
        tol = 1.0e-5 * amp * (sc ? 1.0 : N);
        n_out = 0;
        while (n_out < nf * N) begin
          @(posedge clk); #1;
          if (out_valid) begin
            f = n_out / N;
            if (n_out % N == 0) for (int k = 0; k < N; k++) seen[k] = 0;
            if (n_out == 0) t_first_out = cyc;
            else begin
              checks++;
              if (cyc != prev_cyc + 1) begin failures++; $display("gap in output stream"); end
            end
            prev_cyc = cyc;
            checks++;
            if (seen[out_idx]) begin failures++; $display("index %0d twice", out_idx); end
            seen[out_idx] = 1;
            if (fabs(rl(out_re) - er[f][out_idx]) > tol || fabs(rl(out_im) - ei[f][out_idx]) > tol) begin
              failures++;
              $display("inv=%0d f=%0d k=%0d got (%f,%f) exp (%f,%f)", inv, f, out_idx,
                       rl(out_re), rl(out_im), er[f][out_idx], ei[f][out_idx]);
            end
            n_out++;
          end
        end
      end
    join
    checks++;
    if (t_first_out - t_first_in != N - 1 + 2 * LOGN) begin
      failures++;
      $display("latency %0d, expected %0d", t_first_out - t_first_in, N - 1 + 2 * LOGN);
    end
    repeat (3) @(posedge clk);
    #1 checks++;
    if (!in_ready || busy) begin failures++; $display("core still busy after the burst"); end
  endtask

  initial begin
    in_valid = 0; inverse = 0; scale = 0; in_re = 0; in_im = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    burst(1'b0, 1'b1, 1.0, 2);
    burst(1'b1, 1'b0, 0.5 / N, 3);
    burst(1'b0, 1'b1, 0.25, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
