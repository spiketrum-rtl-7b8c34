// residual_multiplier: scales the shifted kernel by the code intensity.
//
// Computes p = s * phi for each sample of the shifted kernel, rounded back to
// the 34-bit fixed-point format (round to nearest, FRAC_BITS fraction bits).
// As in the published design the multiplier's input and output buses are
// each pipelined by three register stages, so a product leaves IN_STAGES +
// OUT_STAGES = 6 cycles after its operands enter; a new operand may enter
// every cycle. The sample index travels with the data. (The published
// design maps this onto one 25x18 DSP slice; a full 34 x 34 product is
// written here and left to synthesis to map.)
module residual_multiplier #(
  parameter int DATA_W     = 34,
  parameter int FRAC_BITS  = 26,
  parameter int IDX_W      = 11,
  parameter int IN_STAGES  = 3,
  parameter int OUT_STAGES = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] s,         // code intensity, held stable
  input  logic                     in_valid,
  input  logic [IDX_W-1:0]         in_idx,
  input  logic signed [DATA_W-1:0] in_phi,
  output logic                     out_valid,
  output logic [IDX_W-1:0]         out_idx,
  output logic signed [DATA_W-1:0] out_p
);
  localparam int PW = 2 * DATA_W;
  typedef logic signed [DATA_W-1:0] word_t;

  word_t               a_pipe [IN_STAGES];
  word_t               b_pipe [IN_STAGES];
  word_t               p_pipe [OUT_STAGES];
  logic [IDX_W-1:0]    idx_pipe [IN_STAGES + OUT_STAGES];
  logic [IN_STAGES+OUT_STAGES-1:0] v_pipe;
  logic signed [PW-1:0] prod;
  word_t               prod_r;

  assign prod   = a_pipe[IN_STAGES-1] * b_pipe[IN_STAGES-1];
  assign prod_r = word_t'((prod + (PW'(1) <<< (FRAC_BITS - 1))) >>> FRAC_BITS);

  always_ff @(posedge clk) begin
    a_pipe[0]   <= s;
    b_pipe[0]   <= in_phi;
    idx_pipe[0] <= in_idx;
    for (int k = 1; k < IN_STAGES; k++) begin
      a_pipe[k] <= a_pipe[k-1];
      b_pipe[k] <= b_pipe[k-1];
    end
    for (int k = 1; k < IN_STAGES + OUT_STAGES; k++) idx_pipe[k] <= idx_pipe[k-1];
    p_pipe[0] <= prod_r;
    for (int k = 1; k < OUT_STAGES; k++) p_pipe[k] <= p_pipe[k-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v_pipe <= '0;
    else        v_pipe <= (v_pipe << 1) | (IN_STAGES + OUT_STAGES)'(in_valid);
  end

  assign out_valid = v_pipe[IN_STAGES+OUT_STAGES-1];
  assign out_idx   = idx_pipe[IN_STAGES+OUT_STAGES-1];
  assign out_p     = p_pipe[OUT_STAGES-1];
endmodule
