// spiketrum_top: the Spiketrum neuromorphic cochlea, digital core.
//
// Encodes an audio stream, one segment of SEG_LEN samples at a time, into
// spikes on NUM_K * 3 output fibres by matching pursuit over a dictionary of
// NUM_K kernels (Gammatone kernels in the published design):
//   feature extraction  Signal RAM -> forward FFT -> FFT RAM; per kernel,
//                       FFT RAM x kernel spectrum (complex multiplier) ->
//                       pipelined inverse FFT -> code generator (max
//                       search), all NUM_K kernels streamed back to back
//   feedback            optional stop when the code intensity is below a
//                       threshold
//   residual computing  T-D kernel ROM -> shifter -> multiplier (x s) ->
//                       subtractor -> Signal RAM
//   intensity-to-place  nearest of three intensity levels, delay tau, spike
// Block structure, memory sizes, word width, transform size and the
// intensity levels follow the published architecture; all sequencing
// details are in spiketrum_controller.
//
// Interface: audio_* is a valid/ready sample stream (34-bit fixed point,
// FRAC_BITS fraction bits). The kernel memories have load ports: td_* writes
// the time-domain kernel m, tap i at address m*N + i (taps 0..L-1, in
// natural order); fd_* writes {re, im} of bin k of the spectrum of the
// time-reversed, zero-padded kernel at address m*N + k. The codes
// (code_valid, code_m, code_tau, code_s) are also brought out for
// processors that take codes instead of spikes. spikes[c] pulses for
// output channel c = 3*m + level; `tick` is the spike timing base.
// The microphone front end, the USB interfaces and the clock generation of
// the board are outside this module.
module spiketrum_top
  import spiketrum_pkg::*;
#(
  parameter int N          = FFT_N,
  parameter int SEG        = SEG_LEN,
  parameter int L          = KERNEL_LEN,
  parameter int NUM_K      = NUM_KERNELS,
  parameter int CODE_W     = 11,   // max_codes up to 2047 per segment
  parameter int CM_LATENCY = 10,
  localparam int LOGN      = $clog2(N),
  localparam int M_W       = $clog2(NUM_K),
  localparam int K_AW      = $clog2(NUM_K * N),
  localparam int NCH       = NUM_K * CH_PER_K
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              feedback_en,
  input  word_t             stop_threshold,
  input  logic [CODE_W-1:0] max_codes,
  // kernel memory load ports
  input  logic              td_we,
  input  logic [K_AW-1:0]   td_addr,
  input  word_t             td_data,
  input  logic              fd_we,
  input  logic [K_AW-1:0]   fd_addr,
  input  word_t             fd_re,
  input  word_t             fd_im,
  // audio in
  input  logic              audio_valid,
  output logic              audio_ready,
  input  word_t             audio_sample,
  // spike timing base
  input  logic              tick,
  // outputs
  output logic [NCH-1:0]    spikes,
  output logic              code_valid,
  output logic [M_W-1:0]    code_m,
  output logic [LOGN-1:0]   code_tau,
  output word_t             code_s,
  output logic              seg_done,
  output logic              seg_stopped,
  output logic [CODE_W-1:0] seg_codes,
  output logic              spike_collision
);
  // ------------------------------------------------------------------ ctrl
  logic sig_we_c, sig_wzero, res_active;
  logic [LOGN-1:0] sig_addr_c;
  logic fft_in_ready, fft_in_valid, fft_out_valid;
  logic [LOGN-1:0] fft_out_idx;
  word_t fft_out_re, fft_out_im;
  logic [LOGN-1:0] fftram_raddr;
  logic [K_AW-1:0] fdrom_raddr;
  logic fftram_store, cm_in_valid;
  logic ifft_in_ready, ifft_out_valid;
  logic [LOGN-1:0] ifft_out_idx;
  word_t ifft_out_re, ifft_out_im;
  logic cg_clear, cg_in_valid, cg_finish;
  logic [M_W-1:0] cur_m;
  logic fb_valid, fb_stop;
  logic shift_start, shift_done;

  spiketrum_controller #(.N(N), .SEG_LEN(SEG), .NUM_K(NUM_K), .CODE_W(CODE_W)) u_ctrl (
    .clk, .rst_n, .max_codes,
    .audio_valid, .audio_ready,
    .sig_we(sig_we_c), .sig_addr(sig_addr_c), .sig_wzero, .res_active,
    .fft_in_ready, .fft_in_valid, .fft_out_valid, .fft_out_idx,
    .fftram_raddr, .fdrom_raddr, .fftram_store, .cm_in_valid,
    .ifft_in_ready, .ifft_out_valid, .ifft_out_idx,
    .cg_clear, .cg_in_valid, .cur_m, .cg_finish, .code_valid,
    .fb_valid, .fb_stop,
    .shift_start, .shift_done,
    .seg_done, .seg_codes, .seg_stopped);

  // ------------------------------------------------------------ Signal RAM
  logic            sig_we, res_we;
  logic [LOGN-1:0] sig_addr, res_addr;
  word_t           sig_din, sig_dout, res_din;

  always_comb begin
    if (res_active) begin
      sig_we   = res_we;
      sig_addr = res_addr;
      sig_din  = res_din;
    end else begin
      sig_we   = sig_we_c;
      sig_addr = sig_addr_c;
      sig_din  = sig_wzero ? '0 : audio_sample;
    end
  end

  sp_ram #(.DEPTH(N), .WIDTH(DATA_W)) u_signal_ram (
    .clk, .we(sig_we), .addr(sig_addr), .din(sig_din), .dout(sig_dout));

  // ------------------------------------------------------------ forward FFT
  fft_core #(.N(N), .DATA_W(DATA_W)) u_fft (
    .clk, .rst_n, .inverse(1'b0), .scale(1'b1),
    .in_valid(fft_in_valid), .in_ready(fft_in_ready),
    .in_re(sig_dout), .in_im('0),
    .out_valid(fft_out_valid), .out_idx(fft_out_idx),
    .out_re(fft_out_re), .out_im(fft_out_im), .busy());

  // ---------------------------------------------------------------- FFT RAM
  logic [2*DATA_W-1:0] fftram_dout;
  sp_ram #(.DEPTH(N), .WIDTH(2*DATA_W)) u_fft_ram (
    .clk, .we(fftram_store),
    .addr(fftram_store ? fft_out_idx : fftram_raddr),
    .din({fft_out_re, fft_out_im}), .dout(fftram_dout));

  // ------------------------------------------------------- F-D kernel ROM
  logic [2*DATA_W-1:0] fdrom_dout;
  sdp_ram #(.DEPTH(NUM_K * N), .WIDTH(2*DATA_W)) u_fd_kernel_rom (
    .clk, .we(fd_we), .waddr(fd_addr), .din({fd_re, fd_im}),
    .raddr(fdrom_raddr), .dout(fdrom_dout));

  // ------------------------------------------------------ complex multiplier
  logic  cm_out_valid;
  word_t cm_re, cm_im;
  complex_mult #(.DATA_W(DATA_W), .FRAC_BITS(FRAC_BITS), .LATENCY(CM_LATENCY)) u_cmult (
    .clk, .rst_n, .in_valid(cm_in_valid),
    .a_re(fftram_dout[2*DATA_W-1:DATA_W]), .a_im(fftram_dout[DATA_W-1:0]),
    .b_re(fdrom_dout[2*DATA_W-1:DATA_W]),  .b_im(fdrom_dout[DATA_W-1:0]),
    .out_valid(cm_out_valid), .p_re(cm_re), .p_im(cm_im));

  // ------------------------------------------------------------ inverse FFT
  fft_sdf #(.N(N), .DATA_W(DATA_W)) u_ifft (
    .clk, .rst_n, .inverse(1'b1), .scale(1'b0),
    .in_valid(cm_out_valid), .in_ready(ifft_in_ready),
    .in_re(cm_re), .in_im(cm_im),
    .out_valid(ifft_out_valid), .out_idx(ifft_out_idx),
    .out_re(ifft_out_re), .out_im(ifft_out_im), .busy());

  // --------------------------------------------------------- code generator
  code_generator #(.DATA_W(DATA_W), .TAU_W(LOGN), .M_W(M_W)) u_codegen (
    .clk, .rst_n, .clear(cg_clear),
    .in_valid(cg_in_valid), .in_s(ifft_out_re), .in_tau(ifft_out_idx), .in_m(cur_m),
    .finish(cg_finish),
    .code_valid, .code_m, .code_tau, .code_s);

  // --------------------------------------------------------------- feedback
  feedback_unit #(.DATA_W(DATA_W)) u_feedback (
    .clk, .rst_n, .enable(feedback_en), .threshold(stop_threshold),
    .code_valid, .code_s, .decision_valid(fb_valid), .stop(fb_stop));

  // ------------------------------------------------------ residual computing
  logic             td_en;
  logic [K_AW-1:0]  td_raddr;
  word_t            td_dout;
  sp_ram #(.DEPTH(NUM_K * N), .WIDTH(DATA_W)) u_td_kernel_rom (
    .clk, .we(td_we), .addr(td_we ? td_addr : td_raddr), .din(td_data), .dout(td_dout));

  logic            sh_valid;
  logic [LOGN-1:0] sh_idx;
  word_t           sh_phi;
  kernel_shifter #(.N(N), .SEG_LEN(SEG), .KERNEL_LEN(L), .NUM_K(NUM_K), .DATA_W(DATA_W)) u_shifter (
    .clk, .rst_n, .start(shift_start), .m(code_m), .tau(code_tau),
    .rom_en(td_en), .rom_addr(td_raddr), .rom_dout(td_dout),
    .out_valid(sh_valid), .out_idx(sh_idx), .out_phi(sh_phi),
    .done(shift_done), .busy());

  logic            mu_valid;
  logic [LOGN-1:0] mu_idx;
  word_t           mu_p;
  residual_multiplier #(.DATA_W(DATA_W), .FRAC_BITS(FRAC_BITS), .IDX_W(LOGN)) u_rmult (
    .clk, .rst_n, .s(code_s), .in_valid(sh_valid), .in_idx(sh_idx), .in_phi(sh_phi),
    .out_valid(mu_valid), .out_idx(mu_idx), .out_p(mu_p));

  residual_subtractor #(.DATA_W(DATA_W), .IDX_W(LOGN)) u_rsub (
    .clk, .rst_n, .in_valid(mu_valid), .in_idx(mu_idx), .in_p(mu_p),
    .ram_we(res_we), .ram_addr(res_addr), .ram_din(res_din), .ram_dout(sig_dout),
    .wr_done());

  // ---------------------------------------------------- intensity-to-place
  itp_coder #(.NUM_K(NUM_K), .TAU_W(LOGN)) u_itp (
    .clk, .rst_n, .tick, .code_valid, .code_m, .code_tau, .code_s,
    .spikes, .pending(), .collision(spike_collision), .sel_valid(), .sel_ch());

  // Kernel memories are not loaded while the encoder uses them.
  a_td_load: assert property (@(posedge clk) disable iff (!rst_n) td_we |-> !td_en);
endmodule
