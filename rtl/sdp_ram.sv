// sdp_ram: simple dual-port synchronous RAM, one write port and one read port.
//
// Holds the frequency-domain kernel ROM: 40 kernels x 2048 complex bins of
// 2 x 34 bits. The published design uses a dual-port ROM; here the second
// port is the load port through which the (externally computed) kernel
// spectra are written at configuration time, since the kernel values are not
// part of the hardware description. Read latency is one cycle.
module sdp_ram #(
  parameter int DEPTH = 40 * 2048,
  parameter int WIDTH = 68,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] din,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= din;
    dout <= mem[raddr];
  end
endmodule
