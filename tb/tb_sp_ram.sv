// tb_sp_ram: self-checking test of the single-port RAM.
// Random writes and reads against a reference array; checks the one-cycle
// read latency and that a write leaves the read data register unchanged.
module tb_sp_ram;
  localparam int DEPTH = 64, WIDTH = 34, AW = 6;
  logic clk = 0, we;
  logic [AW-1:0] addr;
  logic [WIDTH-1:0] din, dout;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] held;
    we = 0; addr = 0; din = 0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; addr = AW'(i); din = {$urandom, $urandom} ; ref_mem[i] = din;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 2) == 0) begin
        held = dout;
        we = 1; addr = AW'($urandom); din = {$urandom, $urandom}; ref_mem[addr] = din;
        @(negedge clk);
        checks++;
        if (dout !== held) begin failures++; $display("dout changed on write"); end
        we = 0;
      end else begin
        we = 0; addr = AW'($urandom);
        @(negedge clk);
        checks++;
        if (dout !== ref_mem[addr]) begin
          failures++; $display("read %0d: got %h exp %h", addr, dout, ref_mem[addr]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
