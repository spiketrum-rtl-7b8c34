// feedback_unit: stopping decision after each generated code.
//
// A single comparator checks the intensity s of the newest code against a
// programmable threshold; if s is below it, the encoding of the current
// segment ends ("active" mode). With enable = 0 the comparison is ignored and
// the segment always runs for the full number of codes ("passive" mode). The
// comparator and the use of the threshold follow the published feedback
// unit; the registered output (decision one cycle after code_valid) and the
// enable input are this design's choices.
module feedback_unit #(
  parameter int DATA_W = 34
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enable,
  input  logic signed [DATA_W-1:0] threshold,
  input  logic                     code_valid,
  input  logic signed [DATA_W-1:0] code_s,
  output logic                     decision_valid,
  output logic                     stop
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      decision_valid <= 1'b0;
      stop           <= 1'b0;
    end else begin
      decision_valid <= code_valid;
      if (code_valid) stop <= enable && (code_s < threshold);
    end
  end
endmodule
