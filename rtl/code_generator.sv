// code_generator: finds the best-matching kernel and time position.
//
// Watches the stream of convolution outputs of every kernel (one value per
// cycle with its time index tau and kernel index m) and keeps the largest
// intensity seen since `clear`, using a single 34-bit comparator, as the
// published Code Generator does. When the controller signals `finish` after
// the last kernel, the held maximum is presented as the code (m, tau, s)
// with a one-cycle code_valid pulse on the next cycle. Largest means the
// largest signed value (the text speaks of the maximum intensity; taking the
// magnitude instead is a possible alternative not followed here). On equal
// values the first one seen is kept.
module code_generator #(
  parameter int DATA_W = 34,
  parameter int TAU_W  = 11,
  parameter int M_W    = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,      // start of a new search
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_s,
  input  logic [TAU_W-1:0]         in_tau,
  input  logic [M_W-1:0]           in_m,
  input  logic                     finish,     // last kernel processed
  output logic                     code_valid,
  output logic [M_W-1:0]           code_m,
  output logic [TAU_W-1:0]         code_tau,
  output logic signed [DATA_W-1:0] code_s
);
  logic have;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have       <= 1'b0;
      code_valid <= 1'b0;
      code_m     <= '0;
      code_tau   <= '0;
      code_s     <= '0;
    end else begin
      code_valid <= finish;
      if (clear) begin
        have <= 1'b0;
      end else if (in_valid && (!have || in_s > code_s)) begin
        have     <= 1'b1;
        code_s   <= in_s;
        code_tau <= in_tau;
        code_m   <= in_m;
      end
    end
  end
endmodule
