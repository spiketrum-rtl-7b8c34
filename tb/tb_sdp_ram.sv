// tb_sdp_ram: self-checking test of the simple dual-port RAM.
// Writes on one port while reading on the other; checks data and the
// one-cycle read latency against a reference array.
module tb_sdp_ram;
  localparam int DEPTH = 80, WIDTH = 68, AW = 7;
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] din, dout;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] ra;
    we = 0; waddr = 0; raddr = 0; din = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); din = {$urandom, $urandom, $urandom}; ref_mem[i] = din;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ra = AW'($urandom_range(0, DEPTH-1));
      raddr = ra;
      we = $urandom_range(0, 1);
      waddr = AW'($urandom_range(0, DEPTH-1));
      if (waddr == ra) we = 0;
      din = {$urandom, $urandom, $urandom};
      if (we) ref_mem[waddr] = din;
      @(negedge clk);
      we = 0;
      checks++;
      if (dout !== ref_mem[ra]) begin
        failures++; $display("read %0d: got %h exp %h", ra, dout, ref_mem[ra]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
