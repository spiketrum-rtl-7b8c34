// fft_sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of the
// pipelined streaming FFT (fft_sdf).
//
// The stage takes a continuous stream of complex samples in blocks of 2*D and
// performs the decimation-in-frequency butterfly between sample j and sample
// j+D of each block, using a D-word delay line:
//   fill phase      (block position c < D):  the input goes into the delay
//                   line; the stage outputs the word leaving it, which is the
//                   difference a-b of the previous block, times W_2D^c;
//   butterfly phase (c >= D): a = delay-line output, b = input; the stage
//                   outputs a+b and puts a-b into the delay line.
// W_2D^c = exp(-/+ j*2*pi*c/(2D)) (forward/inverse) comes from a D-entry table
// computed at elaboration (2 integer bits, DATA_W-2 fraction bits). Sums go
// through the same twiddle multiplier with factor 1.0, so every output has the
// same 2-cycle pipeline delay. With scale = 1, a+b and a-b are halved
// (rounded); otherwise they wrap if they exceed the word range.
//
// Each sample carries a valid tag. The stage runs (block counter and delay
// line advance) while input arrives, and on its own for one more block after
// the last one, to empty the delay line; it then waits at block position 0.
// Blocks must therefore arrive whole and either back to back or after the
// stage has stopped; an assertion checks that input only starts and stops at
// a block boundary. The SDF structure is the textbook pipelined streaming
// architecture; its use here, the tag scheme and the pipeline depth are this
// design's choices. `inverse` and `scale` must be constant while busy.
module fft_sdf_stage #(
  parameter int D      = 1024,      // half block: N/2, N/4, ... 1
  parameter int DATA_W = 34,
  localparam int CW    = $clog2(2*D),
  localparam int PW    = (D > 1) ? $clog2(D) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     inverse,
  input  logic                     scale,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_re,
  input  logic signed [DATA_W-1:0] in_im,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_re,
  output logic signed [DATA_W-1:0] out_im,
  output logic                     busy
);
  typedef logic signed [DATA_W-1:0] word_t;
  typedef struct packed { word_t re; word_t im; } cplx_t;
  localparam int TW_FRAC = DATA_W - 2;

  typedef word_t tab_t [D];
  function automatic tab_t make_tab(bit sine);
    tab_t t;
    real a, v;
    for (int k = 0; k < D; k++) begin
      a = 3.14159265358979323846 * k / D;
      v = (sine ? $sin(a) : $cos(a)) * (2.0 ** TW_FRAC);
      t[k] = word_t'(longint'(v));   // real-to-integer cast rounds to nearest
    end
    return t;
  endfunction
  localparam tab_t COS_T = make_tab(1'b0);
  localparam tab_t SIN_T = make_tab(1'b1);
  localparam word_t ONE  = word_t'(longint'(1) <<< TW_FRAC);

  cplx_t           dly [D];
  logic [PW-1:0]   ptr;
  logic [CW-1:0]   c;
  logic            cur_v, prev_v;
  logic            run, fill;
  cplx_t           head;

  assign run  = in_valid || (c != '0) || cur_v;
  assign fill = !c[CW-1];
  assign head = dly[ptr];

  function automatic word_t half_or_not(logic signed [DATA_W:0] v, logic sc);
    logic signed [DATA_W:0] r;
    r = sc ? ((v + 1) >>> 1) : v;
    return word_t'(r);
  endfunction

  // butterfly
  cplx_t sum, dif;
  always_comb begin
    sum.re = half_or_not((DATA_W+1)'(head.re) + (DATA_W+1)'(in_re), scale);
    sum.im = half_or_not((DATA_W+1)'(head.im) + (DATA_W+1)'(in_im), scale);
    dif.re = half_or_not((DATA_W+1)'(head.re) - (DATA_W+1)'(in_re), scale);
    dif.im = half_or_not((DATA_W+1)'(head.im) - (DATA_W+1)'(in_im), scale);
  end

  // pipeline register 1: operand, twiddle and tag
  cplx_t d_q;
  word_t wr_q, wi_q;
  logic  v_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c      <= '0;
      ptr    <= '0;
      cur_v  <= 1'b0;
      prev_v <= 1'b0;
      v_q    <= 1'b0;
    end else begin
      v_q <= 1'b0;
      if (run) begin
        c <= c + 1'b1;
        if (c == '0) begin
          prev_v <= cur_v;
          cur_v  <= in_valid;
        end
        ptr <= (ptr == PW'(D-1)) ? '0 : ptr + 1'b1;
        if (fill) begin
          dly[ptr] <= '{re: in_re, im: in_im};
          d_q      <= head;
          wr_q     <= COS_T[c[PW-1:0]];
          wi_q     <= inverse ? SIN_T[c[PW-1:0]] : -SIN_T[c[PW-1:0]];
          v_q      <= (c == '0) ? cur_v : prev_v;
        end else begin
          dly[ptr] <= dif;
          d_q      <= sum;
          wr_q     <= ONE;
          wi_q     <= '0;
          v_q      <= cur_v;
        end
      end
    end
  end

  // pipeline register 2: complex multiply, rounded to nearest
  logic signed [2*DATA_W-1:0] p_re, p_im;
  localparam logic signed [2*DATA_W-1:0] RND = (2*DATA_W)'(1) <<< (TW_FRAC-1);
  always_comb begin
    p_re = d_q.re * wr_q - d_q.im * wi_q;
    p_im = d_q.re * wi_q + d_q.im * wr_q;
  end
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q;
    out_re <= word_t'((p_re + RND) >>> TW_FRAC);
    out_im <= word_t'((p_im + RND) >>> TW_FRAC);
  end

  assign busy = run || v_q || out_valid;

  // Input starts and stops only at a block boundary.
  a_block_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                     (in_valid != $past(in_valid)) |-> (c == '0));
endmodule
