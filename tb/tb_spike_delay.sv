// tb_spike_delay: self-checking test of one Delay counter.
// Loads random tau values with a random tick pattern and checks that the
// spike comes on the (tau+1)-th tick after the load, exactly once, and that a
// reload while pending restarts the wait and reports a collision.
module tb_spike_delay;
  localparam int TW = 11;
  logic clk = 0, rst_n = 0, tick, load, spike, pending, collision;
  logic [TW-1:0] tau;
  int checks = 0, failures = 0;

  spike_delay #(.TAU_W(TW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ticks, nspk; bit reload;
    tick = 0; load = 0; tau = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      tau = TW'($urandom_range(0, 60));
      if (run == 1) tau = '1 >> 5;
      reload = (run % 5 == 3);
      load = 1; @(negedge clk); load = 0;
      checks++;
      if (collision) begin failures++; $display("false collision"); end
      if (reload) begin
        // one tick, then load again: must restart
        tick = 1; @(negedge clk); tick = 0;
        if (tau == 0) begin @(negedge clk); continue; end
        load = 1; @(negedge clk); load = 0;
        checks++;
        if (!collision) begin failures++; $display("collision not reported"); end
      end
      ticks = 0; nspk = 0;
      while (ticks < int'(tau) + 5) begin
        tick = ($urandom_range(0, 2) != 0);
        @(negedge clk);
        if (tick) ticks++;
        if (spike) begin
          nspk++;
          checks++;
          if (ticks != int'(tau) + 1) begin failures++; $display("tau %0d: spike after %0d ticks", tau, ticks); end
        end
      end
      tick = 0;
      checks++;
      if (nspk != 1 || pending) begin failures++; $display("tau %0d: %0d spikes", tau, nspk); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
