// complex_mult: pipelined 34 x 34 complex multiplier with rounding.
//
// Multiplies each bin of the segment spectrum by the matching bin of a
// kernel spectrum: p = a * b = (ar*br - ai*bi) + j(ar*bi + ai*br). The
// 34-bit operands, the 10-cycle latency and the rounding of the result back
// to 34 bits follow the published design (which uses a vendor core built from
// cascaded DSP slices). The pipeline split is this design's own: input
// registers, four partial products, the add/subtract, round-to-nearest
// (add half an LSB, shift right by FRAC bits), then a delay line so that the
// total latency is LATENCY cycles. out_valid follows in_valid by LATENCY
// cycles; a new operand pair may enter every cycle.
module complex_mult #(
  parameter int DATA_W    = 34,
  parameter int FRAC_BITS = 26,
  parameter int LATENCY   = 10    // must be at least 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] a_re,
  input  logic signed [DATA_W-1:0] a_im,
  input  logic signed [DATA_W-1:0] b_re,
  input  logic signed [DATA_W-1:0] b_im,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] p_re,
  output logic signed [DATA_W-1:0] p_im
);
  localparam int PW = 2 * DATA_W + 1;
  typedef logic signed [DATA_W-1:0] word_t;

  // stage 1: input registers
  word_t ar1, ai1, br1, bi1;
  // stage 2: partial products
  logic signed [2*DATA_W-1:0] rr2, ii2, ri2, ir2;
  // stage 3: sums
  logic signed [PW-1:0] sre3, sim3;
  // stage 4: rounded
  word_t re4, im4;
  logic [3:0] v;

  always_ff @(posedge clk) begin
    ar1  <= a_re;  ai1 <= a_im;  br1 <= b_re;  bi1 <= b_im;
    rr2  <= ar1 * br1;
    ii2  <= ai1 * bi1;
    ri2  <= ar1 * bi1;
    ir2  <= ai1 * br1;
    sre3 <= PW'(rr2) - PW'(ii2);
    sim3 <= PW'(ri2) + PW'(ir2);
    re4  <= word_t'((sre3 + (PW'(1) <<< (FRAC_BITS - 1))) >>> FRAC_BITS);
    im4  <= word_t'((sim3 + (PW'(1) <<< (FRAC_BITS - 1))) >>> FRAC_BITS);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  // delay line for the remaining LATENCY-4 cycles
  localparam int D = LATENCY - 4;
  generate
    if (D == 0) begin : g_nodelay
      assign p_re      = re4;
      assign p_im      = im4;
      assign out_valid = v[3];
    end else begin : g_delay
      word_t dre [D];
      word_t dim [D];
      logic [D-1:0] dv;
      always_ff @(posedge clk) begin
        dre[0] <= re4;
        dim[0] <= im4;
        for (int i = 1; i < D; i++) begin
          dre[i] <= dre[i-1];
          dim[i] <= dim[i-1];
        end
      end
      always_ff @(posedge clk) begin
        if (!rst_n) dv <= '0;
        else        dv <= (dv << 1) | D'(v[3]);
      end
      assign p_re      = dre[D-1];
      assign p_im      = dim[D-1];
      assign out_valid = dv[D-1];
    end
  endgenerate

  initial assert (LATENCY >= 4) else $error("complex_mult: LATENCY must be >= 4");
endmodule
