// fft_core: N-point complex FFT / inverse FFT, iterative radix-2 (burst).
//
// The forward FFT of each signal segment. The transform size N = 2048 (2^11)
// and the 34-bit sample width are the published ones; the published design
// takes this core from a vendor library (a radix-4 "burst" core, i.e. one
// that loads a frame, transforms it in place and unloads it), whose insides
// are not described. This module is a simple core of the same kind: an
// in-place decimation-in-time radix-2 engine doing one butterfly per cycle.
// Its working memory is split into two banks by the parity of the address
// bits; the two words of a butterfly differ in one address bit and so always
// lie in different banks, which lets each bank get by with one read and one
// write port.
//
// Operation: after reset the core waits in LOAD with in_ready high. It
// accepts N samples (in_valid, natural order) and writes them at bit-reversed
// addresses; `inverse` and `scale` are sampled with the first sample. It then
// runs log2(N) stages of N/2 butterflies, one issued per cycle through a
// three-step pipeline (read, compute, write back) that is drained for two
// cycles between stages. With scale = 1 each stage halves its outputs
// (rounded), so the result is X/N; with scale = 0 the outputs are unscaled
// and may wrap if they exceed the word range. Finally it streams the N
// results in natural order, one per cycle, with out_valid, out_idx; there is
// no back-pressure. Twiddle factors W^k = cos(2pi k/N) -/+ j sin(2pi k/N) are
// computed at elaboration time with 2 integer bits and DATA_W-2 fraction bits.
// Latency from the last input sample to the first output:
// log2(N)*(N/2 + 2) + 2 cycles; total per transform about
// N*(2 + log2(N)/2) cycles.
module fft_core #(
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
  typedef logic signed [DATA_W-1:0] word_t;
  typedef struct packed { word_t re; word_t im; } cplx_t;
  localparam int TW_FRAC = DATA_W - 2;

  // ---- twiddle tables (constant functions, evaluated at elaboration) ----
  typedef word_t tab_t [N/2];
  function automatic tab_t make_tab(bit sine);
    tab_t t;
    real a, v;
    for (int k = 0; k < N/2; k++) begin
      a = 2.0 * 3.14159265358979323846 * k / N;
      v = (sine ? $sin(a) : $cos(a)) * (2.0 ** TW_FRAC);
      t[k] = word_t'(longint'(v));   // real-to-integer cast rounds to nearest
    end
    return t;
  endfunction
  localparam tab_t COS_T = make_tab(1'b0);
  localparam tab_t SIN_T = make_tab(1'b1);

  function automatic logic [LOGN-1:0] bitrev(logic [LOGN-1:0] v);
    for (int i = 0; i < LOGN; i++) bitrev[i] = v[LOGN-1-i];
  endfunction

  typedef enum logic [2:0] {S_LOAD, S_RUN, S_DRAIN, S_OUT, S_OUT_LAST} state_t;
  state_t state;

  // two banks of N/2 words; word a lives in bank ^a at row a >> 1
  cplx_t bank0 [N/2];
  cplx_t bank1 [N/2];
  logic [LOGN-1:0]      cnt;        // load / unload index
  logic [$clog2(LOGN+1)-1:0] stage;
  logic [LOGN-2:0]      bfly;
  logic                 drain;      // second drain cycle
  logic                 inv_q, scale_q;

  // butterfly addressing for (stage, bfly)
  logic [LOGN-1:0] i0, i1, half, twi;
  logic            p0;            // bank of i0 (i1 is in the other one)
  always_comb begin
    half = LOGN'(1) << stage;
    i0   = (((LOGN)'(bfly) >> stage) << (stage + 1)) | ((LOGN)'(bfly) & (half - 1'b1));
    i1   = i0 | half;
    twi  = ((LOGN)'(bfly) & (half - 1'b1)) << (LOGN - 1 - stage);
    p0   = ^i0;
  end

  // pipeline step 1: read both banks
  logic            v1, p0_1;
  logic [LOGN-2:0] r0_1, r1_1;    // rows of i0 and i1
  cplx_t           q0, q1;        // bank0 / bank1 read data
  word_t           wr_1, wi_1;
  // pipeline step 2: butterfly result
  logic            v2, p0_2;
  logic [LOGN-2:0] r0_2, r1_2;
  cplx_t           y0_2, y1_2;

  // butterfly arithmetic on the read data
  cplx_t                      a, b, y0, y1;
  logic signed [2*DATA_W-1:0] p_rr, p_ii, p_ri, p_ir;
  logic signed [DATA_W+1:0]   t_re, t_im;
  function automatic word_t post(logic signed [DATA_W+1:0] v, logic sc);
    logic signed [DATA_W+1:0] r;
    r = sc ? ((v + 1) >>> 1) : v;
    return word_t'(r);
  endfunction
  always_comb begin
    a     = p0_1 ? q1 : q0;
    b     = p0_1 ? q0 : q1;
    p_rr  = b.re * wr_1;
    p_ii  = b.im * wi_1;
    p_ri  = b.re * wi_1;
    p_ir  = b.im * wr_1;
    t_re  = (DATA_W+2)'((p_rr - p_ii + ((2*DATA_W)'(1) <<< (TW_FRAC-1))) >>> TW_FRAC);
    t_im  = (DATA_W+2)'((p_ri + p_ir + ((2*DATA_W)'(1) <<< (TW_FRAC-1))) >>> TW_FRAC);
    y0    = '{re: post((DATA_W+2)'(a.re) + t_re, scale_q), im: post((DATA_W+2)'(a.im) + t_im, scale_q)};
    y1    = '{re: post((DATA_W+2)'(a.re) - t_re, scale_q), im: post((DATA_W+2)'(a.im) - t_im, scale_q)};
  end

  // bank ports
  logic            we0, we1;
  logic [LOGN-2:0] wa0, wa1, ra0, ra1;
  logic [LOGN-1:0] brc;           // load address (bit-reversed sample index)
  cplx_t           wd0, wd1;
  always_comb begin
    we0 = 1'b0; we1 = 1'b0;
    wa0 = '0;   wa1 = '0;
    wd0 = '{re: in_re, im: in_im};
    wd1 = '{re: in_re, im: in_im};
    // read rows: butterfly operands while running, the output word otherwise
    ra0 = p0 ? i1[LOGN-1:1] : i0[LOGN-1:1];
    ra1 = p0 ? i0[LOGN-1:1] : i1[LOGN-1:1];
    if (state == S_OUT) begin
      ra0 = cnt[LOGN-1:1];
      ra1 = cnt[LOGN-1:1];
    end
    brc = bitrev(cnt);
    if (state == S_LOAD && in_valid) begin
      we0 = !(^brc);
      we1 =   ^brc;
      wa0 = brc[LOGN-1:1];
      wa1 = brc[LOGN-1:1];
    end
    if (v2) begin
      we0 = 1'b1;  wa0 = p0_2 ? r1_2 : r0_2;  wd0 = p0_2 ? y1_2 : y0_2;
      we1 = 1'b1;  wa1 = p0_2 ? r0_2 : r1_2;  wd1 = p0_2 ? y0_2 : y1_2;
    end
  end

  always_ff @(posedge clk) begin
    if (we0) bank0[wa0] <= wd0;
    if (we1) bank1[wa1] <= wd1;
    q0 <= bank0[ra0];
    q1 <= bank1[ra1];
  end

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (cnt != '0);

  logic out_pend, out_par;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cnt       <= '0;
      stage     <= '0;
      bfly      <= '0;
      drain     <= 1'b0;
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_pend  <= 1'b0;
      inv_q     <= 1'b0;
      scale_q   <= 1'b0;
    end else begin
      v1       <= (state == S_RUN);
      v2       <= v1;
      out_pend <= (state == S_OUT);
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == '0) begin
            inv_q   <= inverse;
            scale_q <= scale;
          end
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(N-1)) begin
            state <= S_RUN;
            stage <= '0;
            bfly  <= '0;
          end
        end
        S_RUN: begin
          bfly <= bfly + 1'b1;
          if (bfly == '1) begin
            state <= S_DRAIN;
            drain <= 1'b0;
          end
        end
        S_DRAIN: begin
          drain <= 1'b1;
          if (drain) begin
            if (stage == ($bits(stage))'(LOGN-1)) begin
              state <= S_OUT;
              cnt   <= '0;
            end else begin
              stage <= stage + 1'b1;
              state <= S_RUN;
            end
          end
        end
        S_OUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(N-1)) state <= S_OUT_LAST;
        end
        S_OUT_LAST: begin
          state <= S_LOAD;
          cnt   <= '0;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // pipeline registers (no reset needed: qualified by v1 / v2)
  always_ff @(posedge clk) begin
    p0_1 <= p0;
    r0_1 <= i0[LOGN-1:1];
    r1_1 <= i1[LOGN-1:1];
    wr_1 <= COS_T[twi[LOGN-2:0]];
    wi_1 <= inv_q ? SIN_T[twi[LOGN-2:0]] : -SIN_T[twi[LOGN-2:0]];
    p0_2 <= p0_1;
    r0_2 <= r0_1;
    r1_2 <= r1_1;
    y0_2 <= y0;
    y1_2 <= y1;
    // output word: cnt was read one cycle ago
    out_par <= ^cnt;
    out_idx <= cnt;
  end
  assign out_valid = out_pend;
  assign out_re    = out_par ? q1.re : q0.re;
  assign out_im    = out_par ? q1.im : q0.im;
endmodule
