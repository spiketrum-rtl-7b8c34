// tb_kernel_shifter: self-checking test of the RAM-based kernel shifter.
// A small configuration (N = 64, segment 22, kernel 43 taps, 3 kernels) with
// a kernel memory modelled here. For random (m, tau), including taus that
// put the kernel start before the segment, every emitted sample n must equal
// tap n - (tau - (L-1)) of kernel m, or zero outside the kernel; exactly
// SEG_LEN samples must come out, at most one every two cycles, and the run
// must take L + 2N + 3 cycles. Back-to-back runs check the clear-after-read.
module tb_kernel_shifter;
  localparam int N = 64, S = 22, L = 43, K = 3, W = 34, LOGN = 6;
  localparam int ROM_AW = $clog2(K * N);
  logic clk = 0, rst_n = 0, start, rom_en, out_valid, done, busy;
  logic [1:0] m;
  logic [LOGN-1:0] tau, out_idx;
  logic [ROM_AW-1:0] rom_addr;
  logic signed [W-1:0] rom_dout, out_phi;
  logic signed [W-1:0] rom [K * N];
  int checks = 0, failures = 0, cyc = 0;

  kernel_shifter #(.N(N), .SEG_LEN(S), .KERNEL_LEN(L), .NUM_K(K), .DATA_W(W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    rom_dout <= rom[rom_addr];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_out, last_t, t0, start_n;
    logic signed [W-1:0] e;
    for (int i = 0; i < K * N; i++) rom[i] = ((i % N) < L) ? W'(i + 1) : W'(-7);   // tail garbage must not be used
    start = 0; m = 0; tau = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);         // RAM clear after reset
    for (int run = 0; run < 30; run++) begin
      m   = 2'($urandom_range(0, K - 1));
      tau = LOGN'($urandom);
      if (run == 0) tau = LOGN'(L - 1);       // kernel starts at sample 0
      if (run == 1) tau = 0;                  // starts 42 samples early
      if (run == 2) tau = LOGN'(N - 1);
      start = 1; t0 = cyc; @(negedge clk); start = 0;
      n_out = 0; last_t = -10;
      while (!done) begin
        @(posedge clk); #1;
        if (out_valid) begin
          int k;
          k = (out_idx - (int'(tau) - (L - 1)) + 4 * N) % N;
          e = (k < L) ? rom[m * N + k] : W'(0);
          checks++;
          if (out_idx != LOGN'(n_out) || out_phi !== e) begin
            failures++; $display("m%0d tau%0d n%0d: got idx %0d %0d exp %0d", m, tau, n_out, out_idx, out_phi, e);
          end
          if (cyc - last_t < 2) begin failures++; $display("outputs too close"); end
          last_t = cyc; n_out++;
        end
      end
      checks++;
      if (n_out != S) begin failures++; $display("%0d outputs", n_out); end
      checks++;
      if (cyc - t0 != L + 2 * N + 3) begin failures++; $display("took %0d cycles", cyc - t0); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
