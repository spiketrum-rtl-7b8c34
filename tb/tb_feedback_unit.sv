// tb_feedback_unit: self-checking test of the stop comparator.
// Random intensities around the threshold, in both active (enable = 1) and
// passive (enable = 0) mode; the decision must come one cycle after the code
// and be "stop" exactly when enabled and s < threshold.
module tb_feedback_unit;
  localparam int W = 34;
  logic clk = 0, rst_n = 0, enable, code_valid, decision_valid, stop;
  logic signed [W-1:0] threshold, code_s;
  int checks = 0, failures = 0;

  feedback_unit #(.DATA_W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_stop;
    enable = 0; code_valid = 0; threshold = 0; code_s = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      enable    = $urandom_range(0, 1);
      threshold = W'(671089);                    // 0.01 in Q.26
      code_s    = threshold + W'($signed($urandom_range(0, 20)) - 10);
      if (t % 7 == 0) code_s = -code_s;
      code_valid = 1;
      exp_stop = enable && (code_s < threshold);
      @(negedge clk);
      code_valid = 0;
      checks++;
      if (!decision_valid || stop != exp_stop) begin
        failures++; $display("s=%0d en=%0d: valid %0d stop %0d", code_s, enable, decision_valid, stop);
      end
      @(negedge clk);
      checks++;
      if (decision_valid) begin failures++; $display("decision_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
