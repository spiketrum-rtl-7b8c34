// tb_residual_subtractor: self-checking test of the read-modify-write
// subtractor against a Signal RAM. Random products arrive every second or
// third cycle for random addresses; afterwards the RAM must hold x - p at
// every touched address and x elsewhere.
module tb_residual_subtractor;
  localparam int W = 34, IW = 6, D = 64;
  logic clk = 0, rst_n = 0, in_valid, ram_we, wr_done;
  logic [IW-1:0] in_idx, ram_addr;
  logic signed [W-1:0] in_p, ram_din, ram_dout;
  logic signed [W-1:0] model [D];
  int checks = 0, failures = 0, writes = 0;

  // test-side mux: the bench loads and reads back the RAM when not testing
  logic tb_own, tb_we; logic [IW-1:0] tb_addr; logic signed [W-1:0] tb_din;
  sp_ram #(.DEPTH(D), .WIDTH(W)) u_ram (
    .clk, .we(tb_own ? tb_we : ram_we), .addr(tb_own ? tb_addr : ram_addr),
    .din(tb_own ? tb_din : ram_din), .dout(ram_dout));
  residual_subtractor #(.DATA_W(W), .IDX_W(IW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (wr_done) writes++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    in_valid = 0; in_idx = 0; in_p = 0; tb_own = 1; tb_we = 0; tb_addr = 0; tb_din = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); tb_we = 1; tb_addr = IW'(i); tb_din = W'($signed($urandom)); model[i] = tb_din;
    end
    @(negedge clk); tb_we = 0; tb_own = 0;
    n = 0;
    for (int t = 0; t < 300; t++) begin
      in_valid = 1; in_idx = IW'($urandom); in_p = W'($signed($urandom)) >>> 3;
      model[in_idx] = model[in_idx] - in_p;
      n++;
      @(negedge clk); in_valid = 0;
      repeat ($urandom_range(1, 2)) @(negedge clk);
    end
    @(negedge clk); tb_own = 1;
    for (int i = 0; i < D; i++) begin
      tb_addr = IW'(i); @(negedge clk);
      checks++;
      if (ram_dout !== model[i]) begin failures++; $display("addr %0d: %0d exp %0d", i, ram_dout, model[i]); end
    end
    checks++;
    if (writes != n) begin failures++; $display("%0d writes for %0d inputs", writes, n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
