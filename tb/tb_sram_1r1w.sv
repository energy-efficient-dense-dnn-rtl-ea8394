// tb_sram_1r1w: random writes and reads against an associative model;
// read data must appear one cycle after the read.
module tb_sram_1r1w;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [256];
  int checks = 0, failures = 0;
  sram_1r1w #(.DEPTH(256), .W(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      logic [15:0] exp;
      @(negedge clk);
      we = $urandom_range(1); waddr = 8'($urandom); wdata = 16'($urandom);
      re = 1; raddr = 8'($urandom);
      exp = model[raddr];
      if (we) model[waddr] = wdata;
      @(negedge clk); we = 0; re = 0;
      checks++;
      if (rdata != exp) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
