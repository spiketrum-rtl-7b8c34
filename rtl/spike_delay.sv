// spike_delay: the per-channel Delay of the intensity-to-place stage.
//
// A counter that, once loaded with a code's time position tau, waits tau
// ticks and then emits one spike on its channel, as the published Delay
// process does. `tick` is the time base (one pulse per audio sample period in
// real-time use). The spike is a one-cycle pulse on the (tau+1)-th tick after
// the load, i.e. after tau whole tick periods. A channel holds one pending
// spike: loading it again before it has fired restarts it with the new tau
// and pulses `collision` (the published text does not say what happens then;
// this is this design's choice).
module spike_delay #(
  parameter int TAU_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             load,
  input  logic [TAU_W-1:0] tau,
  output logic             spike,
  output logic             pending,
  output logic             collision
);
  logic [TAU_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      pending   <= 1'b0;
      spike     <= 1'b0;
      collision <= 1'b0;
    end else begin
      spike     <= 1'b0;
      collision <= load && pending;
      if (load) begin
        cnt     <= tau;
        pending <= 1'b1;
      end else if (pending && tick) begin
        if (cnt == '0) begin
          spike   <= 1'b1;
          pending <= 1'b0;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end
endmodule
