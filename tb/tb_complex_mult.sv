// tb_complex_mult: self-checking test of the pipelined complex multiplier.
// Streams random operands every cycle (with gaps) and compares each result
// with an exact product computed here, rounded to nearest; checks that every
// result leaves exactly LATENCY = 10 cycles after its operands.
module tb_complex_mult;
  localparam int W = 34, FRAC = 26, LAT = 10;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  logic signed [W-1:0] a_re, a_im, b_re, b_im, p_re, p_im;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { logic signed [W-1:0] re, im; int t; } exp_t;
  exp_t q [$];

  complex_mult #(.DATA_W(W), .FRAC_BITS(FRAC), .LATENCY(LAT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [W-1:0] rnd(logic signed [2*W:0] v);
    return W'((v + ((2*W+1)'(1) <<< (FRAC - 1))) >>> FRAC);
  endfunction

  function automatic logic signed [W-1:0] rand_word();
    // values within +/-32 so that products stay in range
    return W'($signed($urandom) >>> 0) >>> 5;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (p_re !== e.re || p_im !== e.im) begin
          failures++; $display("got %0d %0d exp %0d %0d", p_re, p_im, e.re, e.im);
        end
        if (cyc - e.t != LAT) begin failures++; $display("latency %0d", cyc - e.t); end
      end
    end
  end

  initial begin
    in_valid = 0; a_re = 0; a_im = 0; b_re = 0; b_im = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      a_re = rand_word(); a_im = rand_word(); b_re = rand_word(); b_im = rand_word();
      if (t < 4) begin a_re = -W'(1 <<< FRAC); b_re = W'(3 <<< (FRAC-1)); end
      if (in_valid) begin
        exp_t e;
        e.re = rnd((2*W+1)'(a_re * b_re) - (2*W+1)'(a_im * b_im));
        e.im = rnd((2*W+1)'(a_re * b_im) + (2*W+1)'(a_im * b_re));
        e.t  = cyc;
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
