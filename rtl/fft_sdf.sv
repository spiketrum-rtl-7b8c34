// fft_sdf: N-point pipelined streaming FFT / inverse FFT (radix-2
// single-path delay feedback, decimation in frequency).
//
// log2(N) fft_sdf_stage instances in a chain, with delay lines of N/2, N/4,
// ... 1 words (N-1 in all) and one twiddle multiplier each. The core takes one
// complex sample per cycle and gives one per cycle, so back-to-back frames
// are transformed at the full clock rate. This is the inverse FFT of the
// published design, there a vendor "pipelined streaming" core whose insides
// are not described; the SDF structure is this design's choice of the same
// architecture class. The 34-bit width and N = 2048 are the published ones.
//
// Interface: frames of N samples in natural order (in_valid high for the
// whole frame). Frames in a burst must be back to back; a new burst may start
// when in_ready is high, i.e. when the previous one has left the core.
// Outputs appear in bit-reversed order: the n-th output of a frame is
// X[bitrev(n)], and out_idx gives that index. There is no back-pressure.
// With scale = 1 every stage halves its results (output X/N); with scale = 0
// the results are unscaled and wrap on overflow. The first output of a frame
// leaves N - 1 + 2*log2(N) cycles after its first input (stage delay lines
// plus two pipeline registers per stage); `busy` stays high until the last
// output of a burst has left.
module fft_sdf #(
  parameter int N      = 2048,
  parameter int DATA_W = 34,
  localparam int LOGN  = $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     inverse,   // 0: e^{-j..} forward, 1: e^{+j..}
  input  logic                     scale,     // 1: divide by 2 in every stage
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_re,
  input  logic signed [DATA_W-1:0] in_im,
  output logic                     out_valid,
  output logic [LOGN-1:0]          out_idx,
  output logic signed [DATA_W-1:0] out_re,
  output logic signed [DATA_W-1:0] out_im,
  output logic                     busy
);
  logic                     v  [LOGN+1];
  logic signed [DATA_W-1:0] re [LOGN+1];
  logic signed [DATA_W-1:0] im [LOGN+1];
  logic [LOGN-1:0]          stage_busy;

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1)), .DATA_W(DATA_W)) u_stage (
      .clk, .rst_n, .inverse, .scale,
      .in_valid (v[s]),   .in_re (re[s]),   .in_im (im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1]),
      .busy     (stage_busy[s])
    );
  end

  function automatic logic [LOGN-1:0] bitrev(logic [LOGN-1:0] x);
    for (int i = 0; i < LOGN; i++) bitrev[i] = x[LOGN-1-i];
  endfunction

  logic [LOGN-1:0] ocnt;     // position of the current output in its frame
  always_ff @(posedge clk) begin
    if (!rst_n)          ocnt <= '0;
    else if (v[LOGN])    ocnt <= ocnt + 1'b1;
  end

  assign out_valid = v[LOGN];
  assign out_re    = re[LOGN];
  assign out_im    = im[LOGN];
  assign out_idx   = bitrev(ocnt);
  assign busy      = |stage_busy;
  assign in_ready  = !busy;
endmodule
