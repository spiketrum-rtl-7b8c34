// tb_residual_multiplier: self-checking test of the scaling multiplier.
// Random kernel samples and intensities; each product must equal s * phi
// rounded to nearest at FRAC_BITS, come out with its index, and leave
// exactly 3 + 3 = 6 cycles after entering.
module tb_residual_multiplier;
  localparam int W = 34, FRAC = 26, IW = 11, LAT = 6;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  logic signed [W-1:0] s, in_phi, out_p;
  logic [IW-1:0] in_idx, out_idx;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { logic signed [W-1:0] p; logic [IW-1:0] idx; int t; } exp_t;
  exp_t q [$];

  residual_multiplier #(.DATA_W(W), .FRAC_BITS(FRAC), .IDX_W(IW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_p !== e.p || out_idx !== e.idx || cyc - e.t != LAT) begin
          failures++; $display("got %0d/%0d at +%0d, exp %0d/%0d", out_p, out_idx, cyc - e.t, e.p, e.idx);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_phi = 0; in_idx = 0;
    s = W'(3 <<< FRAC) + W'(12345);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      in_phi = W'($signed($urandom)) >>> 4;
      in_idx = IW'(t);
      if (in_valid) begin
        exp_t e;
        logic signed [2*W-1:0] pr;
        pr = s * in_phi;
        e.p = W'((pr + ((2*W)'(1) <<< (FRAC - 1))) >>> FRAC);
        e.idx = in_idx; e.t = cyc;
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
