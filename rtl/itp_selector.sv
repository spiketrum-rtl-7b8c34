// itp_selector: intensity-to-place channel choice for one code.
//
// Three subtractors form |s - C1|, |s - C2|, |s - C3| against the three
// channel centre intensities, and two comparators pick the smallest, as in
// the published Intensity-to-Place stage. The chosen output channel is
// 3*m + c (c = 0, 1, 2 for C1, C2, C3; channels counted from 0, so channel 0
// is the published channel 1). The result is registered: sel_valid follows
// code_valid by one cycle and carries the code's tau. Ties go to the lower
// intensity level (this design's choice).
module itp_selector
  import spiketrum_pkg::*;
#(
  parameter int    NUM_K  = 40,
  parameter int    TAU_W  = 11,
  parameter word_t CI1    = C1,
  parameter word_t CI2    = C2,
  parameter word_t CI3    = C3,
  localparam int   M_W    = $clog2(NUM_K),
  localparam int   CH_W   = $clog2(NUM_K * CH_PER_K)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             code_valid,
  input  logic [M_W-1:0]   code_m,
  input  logic [TAU_W-1:0] code_tau,
  input  word_t            code_s,
  output logic             sel_valid,
  output logic [CH_W-1:0]  sel_ch,
  output logic [1:0]       sel_level,
  output logic [TAU_W-1:0] sel_tau
);
  typedef logic signed [DATA_W:0] wide_t;   // one extra bit: no overflow

  function automatic wide_t absdiff(word_t a, word_t b);
    wide_t d;
    d = wide_t'(a) - wide_t'(b);
    return (d < 0) ? -d : d;
  endfunction

  wide_t d1, d2, d3;
  logic  [1:0] lvl;
  always_comb begin
    d1 = absdiff(code_s, CI1);
    d2 = absdiff(code_s, CI2);
    d3 = absdiff(code_s, CI3);
    // comparator 1: C1 vs C2; comparator 2: winner vs C3
    if (d2 < d1) lvl = (d3 < d2) ? 2'd2 : 2'd1;
    else         lvl = (d3 < d1) ? 2'd2 : 2'd0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_valid <= 1'b0;
      sel_ch    <= '0;
      sel_level <= '0;
      sel_tau   <= '0;
    end else begin
      sel_valid <= code_valid;
      if (code_valid) begin
        sel_ch    <= CH_W'(code_m) * CH_W'(CH_PER_K) + CH_W'(lvl);
        sel_level <= lvl;
        sel_tau   <= code_tau;
      end
    end
  end
endmodule
