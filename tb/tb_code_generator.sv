// tb_code_generator: self-checking test of the maximum search.
// Feeds several searches of random intensities (including negative-only
// searches and ties) for a number of kernels and checks the reported
// (m, tau, s) against the first occurrence of the largest value.
module tb_code_generator;
  localparam int W = 34, TW = 11, MW = 6;
  logic clk = 0, rst_n = 0, clear, in_valid, finish, code_valid;
  logic signed [W-1:0] in_s, code_s;
  logic [TW-1:0] in_tau, code_tau;
  logic [MW-1:0] in_m, code_m;
  int checks = 0, failures = 0;

  code_generator #(.DATA_W(W), .TAU_W(TW), .M_W(MW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [W-1:0] best; int bm, bt; bit have;
    clear = 0; in_valid = 0; finish = 0; in_s = 0; in_tau = 0; in_m = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      have = 0;
      for (int m = 0; m < 5; m++) begin
        for (int t = 0; t < 100; t++) begin
          in_valid = ($urandom_range(0, 4) != 0);
          in_m = MW'(m); in_tau = TW'(t);
          in_s = W'($signed($urandom_range(0, 2000)) - 1000);
          if (run % 4 == 1) in_s = -W'($urandom_range(1, 1000));     // all negative
          if (run % 4 == 2) in_s = W'($urandom_range(0, 3));          // many ties
          if (in_valid && (!have || in_s > best)) begin
            have = 1; best = in_s; bm = m; bt = t;
          end
          @(negedge clk);
        end
      end
      in_valid = 0; finish = 1;
      @(negedge clk); finish = 0;
      checks++;
      if (!code_valid || code_s != best || code_m != MW'(bm) || code_tau != TW'(bt)) begin
        failures++;
        $display("run %0d: got v%0d m%0d t%0d s%0d exp m%0d t%0d s%0d", run, code_valid,
                 code_m, code_tau, code_s, bm, bt, best);
      end
      @(negedge clk);
      checks++;
      if (code_valid) begin failures++; $display("code_valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
