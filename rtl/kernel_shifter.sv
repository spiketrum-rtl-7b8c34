// kernel_shifter: RAM-based time shift of the selected kernel.
//
// Places kernel m so that it lines up with the code's time position tau in
// the 2048-sample segment buffer, as the published Shifter does: the kernel
// is read from the time-domain kernel ROM and written into the Shifter RAM
// starting at an address that depends on tau, then read out in order; each
// word is cleared right after it is read so the RAM is all zeros for the
// next shift (zeros are what a linear shift brings in).
//
// Convention (this design's): tau is the index of the full linear
// convolution x * phi_rev (0 .. N-1, N = S + L - 1), where phi_rev is the
// time-reversed kernel whose spectrum sits in the frequency-domain ROM. The
// kernel then starts at sample tau - (L - 1) of the segment, so tap i goes to
// address (i + tau - (L - 1)) mod N. Taps falling before the segment start
// wrap to the top of the buffer, beyond the S samples that are used.
//
// After reset the RAM is zeroed once (N cycles, busy high) so that the first
// shift also starts from an empty RAM; `start` is only accepted when idle.
// Timing: `start` (one cycle, with m and tau) begins the write phase of L
// cycles (one ROM read per cycle, one cycle ROM latency). Then the read
// phase takes two cycles per address (read, then clear) over all N
// addresses; for addresses below SEG_LEN it emits out_valid, out_idx and
// out_phi in the second cycle, so at most one output every two cycles.
// `done` pulses once when the RAM has been cleared, L + 2N + 3 cycles after
// the cycle in which start was applied.
module kernel_shifter #(
  parameter int N          = 2048,
  parameter int SEG_LEN    = 696,
  parameter int KERNEL_LEN = 1353,
  parameter int NUM_K      = 40,
  parameter int DATA_W     = 34,
  localparam int LOGN      = $clog2(N),
  localparam int M_W       = $clog2(NUM_K),
  localparam int ROM_AW    = $clog2(NUM_K * N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [M_W-1:0]           m,
  input  logic [LOGN-1:0]          tau,
  // time-domain kernel ROM read port (kernel k occupies k*N .. k*N+N-1)
  output logic                     rom_en,
  output logic [ROM_AW-1:0]        rom_addr,
  input  logic signed [DATA_W-1:0] rom_dout,
  // shifted kernel stream
  output logic                     out_valid,
  output logic [LOGN-1:0]          out_idx,
  output logic signed [DATA_W-1:0] out_phi,
  output logic                     done,
  output logic                     busy
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_WRITE, S_READ, S_CLEAR} state_t;
  state_t state;

  logic [M_W-1:0]   m_q;
  logic [LOGN-1:0]  base_q;      // tau - (L-1) mod N
  logic [LOGN:0]    i;           // tap / address counter
  logic             wr_pend;     // ROM data of tap i-1 is valid this cycle
  logic [LOGN-1:0]  wr_addr;

  // Shifter RAM (single port)
  logic             ram_we;
  logic [LOGN-1:0]  ram_addr;
  logic [DATA_W-1:0] ram_din, ram_dout;
  sp_ram #(.DEPTH(N), .WIDTH(DATA_W)) u_shift_ram (
    .clk, .we(ram_we), .addr(ram_addr), .din(ram_din), .dout(ram_dout));

  assign rom_en   = (state == S_WRITE) && (i < (LOGN+1)'(KERNEL_LEN));
  assign rom_addr = ROM_AW'(m_q) * ROM_AW'(N) + ROM_AW'(i[LOGN-1:0]);
  assign busy     = (state != S_IDLE);

  always_comb begin
    ram_we   = 1'b0;
    ram_addr = i[LOGN-1:0];
    ram_din  = '0;
    if (wr_pend) begin                 // write phase: store tap
      ram_we   = 1'b1;
      ram_addr = wr_addr;
      ram_din  = rom_dout;
    end else if (state == S_CLEAR || state == S_INIT) begin
      ram_we   = 1'b1;                 // clear the word just read / after reset
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_INIT;
      i         <= '0;
      wr_pend   <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      m_q       <= '0;
      base_q    <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      wr_pend   <= rom_en;
      wr_addr   <= base_q + i[LOGN-1:0];
      unique case (state)
        S_INIT: begin                  // zero the RAM once after reset
          i <= i + 1'b1;
          if (i == (LOGN+1)'(N-1)) begin
            i     <= '0;
            state <= S_IDLE;
          end
        end
        S_IDLE: if (start) begin
          m_q    <= m;
          base_q <= tau - LOGN'(KERNEL_LEN - 1);
          i      <= '0;
          state  <= S_WRITE;
        end
        S_WRITE: begin
          if (i < (LOGN+1)'(KERNEL_LEN)) i <= i + 1'b1;
          else if (!wr_pend) begin     // last tap written
            i     <= '0;
            state <= S_READ;
          end
        end
        S_READ: state <= S_CLEAR;      // read issued at address i
        S_CLEAR: begin                 // ram_dout holds word i, clear it
          if (i < (LOGN+1)'(SEG_LEN)) begin
            out_valid <= 1'b1;
            out_idx   <= i[LOGN-1:0];
            out_phi   <= ram_dout;
          end
          i <= i + 1'b1;
          if (i == (LOGN+1)'(N-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("kernel_shifter: start while busy or initialising");
endmodule
