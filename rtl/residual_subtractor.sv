// residual_subtractor: x_new = x - s*phi, written back into the Signal RAM.
//
// For each scaled kernel sample p with index n it performs a two-cycle
// read-modify-write on the single-port Signal RAM: cycle 1 reads x[n],
// cycle 2 writes x[n] - p[n] back to the same address. It is plain fabric
// logic, as in the published design. The read/write sequencing is this
// design's own, forced by the single-port RAM: inputs must therefore arrive
// at most every other cycle (the kernel shifter paces them so), which an
// assertion checks. `wr_done` pulses with each write.
module residual_subtractor #(
  parameter int DATA_W = 34,
  parameter int IDX_W  = 11
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [IDX_W-1:0]         in_idx,
  input  logic signed [DATA_W-1:0] in_p,
  // Signal RAM port
  output logic                     ram_we,
  output logic [IDX_W-1:0]         ram_addr,
  output logic signed [DATA_W-1:0] ram_din,
  input  logic signed [DATA_W-1:0] ram_dout,
  output logic                     wr_done
);
  logic                     ph2;
  logic [IDX_W-1:0]         idx_q;
  logic signed [DATA_W-1:0] p_q;

  always_ff @(posedge clk) begin
    if (!rst_n) ph2 <= 1'b0;
    else        ph2 <= in_valid;
    if (in_valid) begin
      idx_q <= in_idx;
      p_q   <= in_p;
    end
  end

  assign ram_we   = ph2;
  assign ram_addr = ph2 ? idx_q : in_idx;
  assign ram_din  = ram_dout - p_q;
  assign wr_done  = ph2;

  a_paced: assert property (@(posedge clk) disable iff (!rst_n) ph2 |-> !in_valid)
    else $error("residual_subtractor: inputs closer than two cycles");
endmodule
