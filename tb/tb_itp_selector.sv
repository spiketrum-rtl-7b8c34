// tb_itp_selector: self-checking test of the nearest-intensity choice.
// Random intensities spread over several decades (and negative values) are
// compared here in floating point with the three levels 0.0065, 0.4115 and
// 25.8744; the selected channel must be 3*m + nearest level, one cycle later.
module tb_itp_selector;
  import spiketrum_pkg::*;
  localparam int K = 40, TW = 11;
  logic clk = 0, rst_n = 0, code_valid, sel_valid;
  logic [5:0] code_m;
  logic [TW-1:0] code_tau, sel_tau;
  word_t code_s;
  logic [6:0] sel_ch;
  logic [1:0] sel_level;
  int checks = 0, failures = 0;

  itp_selector #(.NUM_K(K), .TAU_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    real s, c [3], best; int lvl; int hits [3];
    c[0] = 0.0065; c[1] = 0.4115; c[2] = 25.8744;
    hits = '{0, 0, 0};
    code_valid = 0; code_m = 0; code_tau = 0; code_s = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      s = 10.0 ** ($itor($urandom_range(0, 6000)) / 1000.0 - 4.0);   // 1e-4 .. 100
      if (s > 60.0) s = 60.0;
      if (t % 10 == 0) s = -s;
      code_s = to_fixed(s);
      s = $itor(code_s) / (2.0 ** FRAC_BITS);
      lvl = 0; best = fabs(s - c[0]);
      for (int k = 1; k < 3; k++) if (fabs(s - c[k]) < best) begin best = fabs(s - c[k]); lvl = k; end
      code_m = 6'($urandom_range(0, K - 1)); code_tau = TW'($urandom);
      code_valid = 1;
      @(negedge clk); code_valid = 0;
      checks++;
      hits[lvl]++;
      if (!sel_valid || sel_ch != 7'(3 * code_m + lvl) || sel_level != 2'(lvl) || sel_tau != code_tau) begin
        failures++; $display("s=%f m=%0d: ch %0d exp %0d", s, code_m, sel_ch, 3 * code_m + lvl);
      end
    end
    checks++;
    if (hits[0] == 0 || hits[1] == 0 || hits[2] == 0) begin failures++; $display("a level was never chosen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
