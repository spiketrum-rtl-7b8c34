// itp_coder: the Intensity-to-Place coding stage, 40 sections x 3 channels.
//
// Turns each code (m, tau, s) into one spike on one of NUM_K * 3 output
// fibres. The itp_selector picks the channel whose centre intensity is
// nearest to s within section m; that channel's spike_delay is loaded with
// tau and fires tau ticks later. The section/channel arrangement (one delay
// per channel, 120 channels) follows the published architecture diagram.
// spikes[c] is a one-cycle pulse; code to load takes one cycle.
module itp_coder
  import spiketrum_pkg::*;
#(
  parameter int NUM_K = 40,
  parameter int TAU_W = 11,
  localparam int M_W  = $clog2(NUM_K),
  localparam int NCH  = NUM_K * CH_PER_K,
  localparam int CH_W = $clog2(NCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             code_valid,
  input  logic [M_W-1:0]   code_m,
  input  logic [TAU_W-1:0] code_tau,
  input  word_t            code_s,
  output logic [NCH-1:0]   spikes,
  output logic [NCH-1:0]   pending,
  output logic             collision,
  output logic             sel_valid,
  output logic [CH_W-1:0]  sel_ch
);
  logic [TAU_W-1:0] sel_tau;
  logic [1:0]       sel_level;
  logic [NCH-1:0]   coll;

  itp_selector #(.NUM_K(NUM_K), .TAU_W(TAU_W)) u_sel (
    .clk, .rst_n, .code_valid, .code_m, .code_tau, .code_s,
    .sel_valid, .sel_ch, .sel_level, .sel_tau);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    spike_delay #(.TAU_W(TAU_W)) u_delay (
      .clk, .rst_n, .tick,
      .load(sel_valid && (sel_ch == CH_W'(c))),
      .tau(sel_tau),
      .spike(spikes[c]),
      .pending(pending[c]),
      .collision(coll[c]));
  end

  assign collision = |coll;
endmodule
