// tb_fft_core: self-checking test of the radix-2 FFT / IFFT core.
// Runs a 64-point core on random complex data: a scaled forward transform
// (expected X[k]/N) and an unscaled inverse transform, each compared with a
// direct DFT computed here in floating point. Also checks the documented
// latency: the first output appears log2(N)*(N/2+2)+2 cycles after the last
// input.
module tb_fft_core;
  localparam int N = 64, W = 34, LOGN = 6, FRAC = 26;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic inverse, scale, in_valid, in_ready, out_valid, busy;
  logic signed [W-1:0] in_re, in_im, out_re, out_im;
  logic [LOGN-1:0] out_idx;
  int checks = 0, failures = 0;
  real xr [N], xi [N], er [N], ei [N];
  int cyc = 0, t_last_in, t_first_out;

  fft_core #(.N(N), .DATA_W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic run(bit inv, bit sc, real amp);
    real sgn, a, tol;
    int n_out;
    for (int n = 0; n < N; n++) begin
      xr[n] = amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0);
      xi[n] = amp * ($itor($urandom_range(0, 2000)) / 1000.0 - 1.0);
      xr[n] = rl(fx(xr[n])); xi[n] = rl(fx(xi[n]));
    end
    sgn = inv ? 1.0 : -1.0;
    for (int k = 0; k < N; k++) begin
      er[k] = 0; ei[k] = 0;
      for (int n = 0; n < N; n++) begin
        a = 2.0 * PI * ((k * n) % N) / N;
        er[k] += xr[n] * $cos(a) - sgn * xi[n] * $sin(a);
        ei[k] += sgn * xr[n] * $sin(a) + xi[n] * $cos(a);
      end
      if (sc) begin er[k] /= N; ei[k] /= N; end
    end
    wait (in_ready);
    @(negedge clk);
    inverse = inv; scale = sc;
    for (int n = 0; n < N; n++) begin
      in_valid = 1; in_re = fx(xr[n]); in_im = fx(xi[n]);
      @(negedge clk);
    end
    t_last_in = cyc - 1;
    in_valid = 0;
    tol = 1.0e-5 * amp * (sc ? 1.0 : N);
    n_out = 0;
    while (n_out < N) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (n_out == 0) t_first_out = cyc;
        checks++;
        if (out_idx != LOGN'(n_out)) begin failures++; $display("order %0d %0d", out_idx, n_out); end
        if (fabs(rl(out_re) - er[n_out]) > tol || fabs(rl(out_im) - ei[n_out]) > tol) begin
          failures++;
          $display("inv=%0d k=%0d got (%f,%f) exp (%f,%f)", inv, n_out, rl(out_re), rl(out_im), er[n_out], ei[n_out]);
        end
        n_out++;
      end
    end
    checks++;
    if (t_first_out - t_last_in != LOGN * (N / 2 + 2) + 2) begin
      failures++; $display("latency %0d, expected %0d", t_first_out - t_last_in, LOGN * (N / 2 + 2) + 2);
    end
  endtask

  initial begin
    in_valid = 0; inverse = 0; scale = 0; in_re = 0; in_im = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, 1'b1, 1.0);
    run(1'b1, 1'b0, 0.5 / N);
    run(1'b0, 1'b1, 0.25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
