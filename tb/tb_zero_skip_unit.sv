// tb_zero_skip_unit: random index streams; the address must be the
// position of the entry in the uncompressed channel order.
module tb_zero_skip_unit;
  logic clk = 0, rst_n = 0, start = 0, skip_en = 1, step = 0;
  logic [3:0] idx = 0;
  logic [4:0] last_addr = 31, next_addr;
  logic last;
  int checks = 0, failures = 0;
  zero_skip_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int pos;
      @(negedge clk); start = 1; skip_en = (t % 4 != 3); last_addr = 5'($urandom_range(31));
      @(negedge clk); start = 0;
      pos = -1;
      while (1) begin
        idx = 4'($urandom_range(skip_en ? 3 : 15));
        if (pos + 1 + (skip_en ? int'(idx) : 0) > int'(last_addr))
          idx = skip_en ? 4'(int'(last_addr) - pos - 1) : idx;
        pos = pos + 1 + (skip_en ? int'(idx) : 0);
        #1; checks++;
        if (int'(next_addr) != pos) failures++;
        checks++;
        if (last != (pos == int'(last_addr))) failures++;
        step = 1; @(negedge clk); step = 0;
        if (pos == int'(last_addr)) break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
