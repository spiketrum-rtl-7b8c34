// tb_itp_coder: self-checking test of the 120-channel intensity-to-place
// stage. Codes with random kernel, intensity level and tau are sent one at a
// time; exactly one spike must appear, on channel 3*m + level, tau+1 ticks
// after the code (tick every cycle here), and no other channel may fire.
module tb_itp_coder;
  import spiketrum_pkg::*;
  localparam int K = 40, TW = 11, NCH = 120;
  logic clk = 0, rst_n = 0, tick, code_valid, collision, sel_valid;
  logic [5:0] code_m;
  logic [TW-1:0] code_tau;
  word_t code_s;
  logic [NCH-1:0] spikes, pending;
  logic [6:0] sel_ch;
  int checks = 0, failures = 0;

  itp_coder #(.NUM_K(K), .TAU_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t lv [3]; int lvl, ch, t, seen;
    lv[0] = to_fixed(0.005); lv[1] = to_fixed(0.5); lv[2] = to_fixed(20.0);
    tick = 1; code_valid = 0; code_m = 0; code_tau = 0; code_s = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      code_m = 6'($urandom_range(0, K - 1));
      lvl = $urandom_range(0, 2);
      code_s = lv[lvl];
      code_tau = TW'($urandom_range(0, 40));
      ch = 3 * code_m + lvl;
      code_valid = 1; @(negedge clk); code_valid = 0;
      t = 0; seen = 0;
      // selector takes one cycle, the delay then waits tau+1 ticks
      repeat (int'(code_tau) + 10) begin
        @(negedge clk); t++;
        if (spikes != '0) begin
          checks++;
          if (!spikes[ch] || $countones(spikes) != 1 || t != int'(code_tau) + 2) begin
            failures++; $display("ch %0d tau %0d: spikes %h at %0d", ch, code_tau, spikes, t);
          end
          seen++;
        end
      end
      checks++;
      if (seen != 1) begin failures++; $display("ch %0d: %0d spike cycles", ch, seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
