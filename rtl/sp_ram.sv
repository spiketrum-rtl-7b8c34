// sp_ram: single-port synchronous RAM (one address, read or write per cycle).
//
// Used for the Signal RAM (2048 x 34 bit, 8.7 kB), the FFT RAM (2048 x 68 bit,
// 17.4 kB, real and imaginary halves), the Shifter RAM and the time-domain
// kernel ROM (40 x 2048 x 34 bit). The design keeps its memories single-port
// where the published architecture says so. The time-domain kernel "ROM" is
// an instance of this RAM because the kernel values are loaded through the
// write side at configuration time rather than fixed at build time.
// Timing: a read issued in cycle t (we = 0) returns mem[addr] after the clock
// edge, in cycle t+1. A write stores din at the clock edge; rdata is then
// left unchanged (no write-through).
module sp_ram #(
  parameter int DEPTH = 2048,
  parameter int WIDTH = 34,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= din;
    else    dout      <= mem[addr];
  end
endmodule
