// spiketrum_controller: sequencer of the Spiketrum encoder.
//
// Runs one segment at a time through the matching-pursuit loop:
//   CAPTURE  accept SEG_LEN audio samples (valid/ready) into the Signal RAM
//   ZERO     clear Signal RAM addresses SEG_LEN .. N-1 (zero padding)
//   FFT_LD   stream the N words of the Signal RAM into the forward FFT
//   FFT_ST   store the N FFT outputs in the FFT RAM
//   CONV     stream, back to back, NUM_K frames of N words: FFT RAM times
//            the spectrum of kernel m = 0 .. NUM_K-1, through the complex
//            multiplier into the pipelined inverse FFT. The inverse FFT
//            outputs go to the code generator as they arrive, labelled with
//            the kernel whose frame they belong to (cur_m).
//   CONV_DRAIN  wait for the last frame to leave the inverse FFT
//   CODE     the code generator presents (m, tau, s); it goes to the
//            intensity-to-place stage and the feedback unit
//   DECIDE   stop the segment if the feedback unit says so or max_codes codes
//            have been made; otherwise
//   RESID    start the kernel shifter; the shifted kernel flows through the
//            residual multiplier and subtractor back into the Signal RAM;
//            then go back to FFT_LD for the next code.
// The stage order, the single-port memories, the handshake with the FFT
// cores (wait for ready before streaming) and the continuous feeding of the
// pipelined inverse FFT follow the published description of the custom
// controller; the state encoding, the counters and the rule that a code below
// the stop threshold is still emitted (so every segment yields at least one
// code) are this design's choices.
// Memory reads have one cycle of latency; every *_in_valid output is the
// read strobe delayed by one cycle, aligned with the RAM data. The end of an
// inverse-FFT frame is recognised by its output bin N-1, which comes last in
// both natural and bit-reversed order.
module spiketrum_controller #(
  parameter int N       = 2048,
  parameter int SEG_LEN = 696,
  parameter int NUM_K   = 40,
  parameter int CODE_W  = 11,
  localparam int LOGN   = $clog2(N),
  localparam int M_W    = $clog2(NUM_K),
  localparam int FD_AW  = $clog2(NUM_K * N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CODE_W-1:0] max_codes,      // codes per segment (k), >= 1
  // audio input handshake
  input  logic              audio_valid,
  output logic              audio_ready,
  // Signal RAM (controller side; the subtractor owns it while res_active)
  output logic              sig_we,
  output logic [LOGN-1:0]   sig_addr,
  output logic              sig_wzero,      // 1: write zero, 0: write audio
  output logic              res_active,
  // forward FFT
  input  logic              fft_in_ready,
  output logic              fft_in_valid,
  input  logic              fft_out_valid,
  input  logic [LOGN-1:0]   fft_out_idx,
  // FFT RAM / F-D kernel ROM read
  output logic [LOGN-1:0]   fftram_raddr,
  output logic [FD_AW-1:0]  fdrom_raddr,
  output logic              fftram_store,   // FFT RAM written from FFT output
  output logic              cm_in_valid,
  // inverse FFT
  input  logic              ifft_in_ready,
  input  logic              ifft_out_valid,
  input  logic [LOGN-1:0]   ifft_out_idx,
  // code generator
  output logic              cg_clear,
  output logic              cg_in_valid,
  output logic [M_W-1:0]    cur_m,          // kernel of the current IFFT outputs
  output logic              cg_finish,
  input  logic              code_valid,
  // feedback
  input  logic              fb_valid,
  input  logic              fb_stop,
  // residual
  output logic              shift_start,
  input  logic              shift_done,
  // status
  output logic              seg_done,
  output logic [CODE_W-1:0] seg_codes,
  output logic              seg_stopped    // seg_done came from the feedback unit
);
  typedef enum logic [3:0] {
    S_CAPTURE, S_ZERO, S_FFT_WAIT, S_FFT_LD, S_FFT_ST, S_CONV_WAIT, S_CONV,
    S_CONV_DRAIN, S_CODE, S_DECIDE, S_RESID
  } state_t;
  state_t state;

  logic [LOGN:0]   cnt;
  logic [CODE_W-1:0] ncodes;
  logic [M_W-1:0]  rd_m;                    // kernel being read in CONV

  assign audio_ready  = (state == S_CAPTURE);
  assign res_active   = (state == S_RESID);
  assign fftram_store = (state == S_FFT_ST) && fft_out_valid;
  assign cg_in_valid  = (state == S_CONV || state == S_CONV_DRAIN) && ifft_out_valid;
  assign fdrom_raddr  = FD_AW'(rd_m) * FD_AW'(N) + FD_AW'(cnt[LOGN-1:0]);
  assign fftram_raddr = cnt[LOGN-1:0];
  assign seg_codes    = ncodes;

  always_comb begin
    sig_we    = 1'b0;
    sig_wzero = 1'b0;
    sig_addr  = cnt[LOGN-1:0];
    if (state == S_CAPTURE) sig_we = audio_valid;
    if (state == S_ZERO) begin
      sig_we    = 1'b1;
      sig_wzero = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_CAPTURE;
      cnt          <= '0;
      fft_in_valid <= 1'b0;
      cm_in_valid  <= 1'b0;
      cur_m        <= '0;
      rd_m         <= '0;
      cg_clear     <= 1'b0;
      cg_finish    <= 1'b0;
      shift_start  <= 1'b0;
      seg_done     <= 1'b0;
      seg_stopped  <= 1'b0;
      ncodes       <= '0;
    end else begin
      fft_in_valid <= 1'b0;
      cm_in_valid  <= 1'b0;
      cg_clear     <= 1'b0;
      cg_finish    <= 1'b0;
      shift_start  <= 1'b0;
      seg_done     <= 1'b0;
      unique case (state)
        S_CAPTURE: if (audio_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == (LOGN+1)'(SEG_LEN-1)) state <= S_ZERO;
        end
        S_ZERO: begin
          cnt <= cnt + 1'b1;
          if (cnt == (LOGN+1)'(N-1)) begin
            cnt    <= '0;
            ncodes <= '0;
            state  <= S_FFT_WAIT;
          end
        end
        S_FFT_WAIT: if (fft_in_ready) state <= S_FFT_LD;   // handshake
        S_FFT_LD: begin                 // read Signal RAM 0..N-1
          fft_in_valid <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == (LOGN+1)'(N-1)) begin
            cnt   <= '0;
            state <= S_FFT_ST;
          end
        end
        S_FFT_ST: if (fft_out_valid && fft_out_idx == LOGN'(N-1)) begin
          cur_m    <= '0;
          rd_m     <= '0;
          cg_clear <= 1'b1;
          state    <= S_CONV_WAIT;
        end
        S_CONV_WAIT: if (ifft_in_ready) state <= S_CONV;
        S_CONV: begin                   // read FFT RAM and kernel spectra
          cm_in_valid <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == (LOGN+1)'(N-1)) begin
            cnt <= '0;
            if (rd_m == M_W'(NUM_K-1)) state <= S_CONV_DRAIN;
            else                      rd_m  <= rd_m + 1'b1;
          end
        end
        S_CONV_DRAIN: if (cg_in_valid && ifft_out_idx == LOGN'(N-1) &&
                          cur_m == M_W'(NUM_K-1)) begin
          cg_finish <= 1'b1;
          state     <= S_CODE;
        end
        S_CODE: if (code_valid) begin
          ncodes <= ncodes + 1'b1;
          state  <= S_DECIDE;
        end
        S_DECIDE: if (fb_valid) begin
          if (fb_stop || ncodes >= max_codes) begin
            seg_done    <= 1'b1;
            seg_stopped <= fb_stop;
            cnt         <= '0;
            state       <= S_CAPTURE;
          end else begin
            shift_start <= 1'b1;
            state       <= S_RESID;
          end
        end
        S_RESID: if (shift_done) begin
          cnt   <= '0;
          state <= S_FFT_WAIT;
        end
        default: state <= S_CAPTURE;
      endcase
      // label of the inverse-FFT outputs: next kernel after each frame end
      if (cg_in_valid && ifft_out_idx == LOGN'(N-1) && cur_m != M_W'(NUM_K-1))
        cur_m <= cur_m + 1'b1;
    end
  end

  // The forward FFT must be ready whenever the controller streams into it,
  // and inverse-FFT results only arrive while the convolutions run.
  a_fft_ready:  assert property (@(posedge clk) disable iff (!rst_n)
                  fft_in_valid |-> fft_in_ready);
  a_ifft_window: assert property (@(posedge clk) disable iff (!rst_n)
                  ifft_out_valid |-> (state == S_CONV || state == S_CONV_DRAIN));
endmodule
