// tb_mac_array: four MACs fed one sub-word and a shared weight slice;
// each accumulator is compared with its own integer sum.
module tb_mac_array;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [15:0] subword = 0;
  logic signed [3:0] w = 0;
  logic signed [3:0][11:0] acc;
  int checks = 0, failures = 0, model[4];
  mac_array dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      en = 1; clr = (i % 20 == 0);
      subword = 16'($urandom); w = 4'($urandom);
      for (int s = 0; s < 4; s++)
        model[s] = wrap12((clr ? 0 : model[s]) + sx4(subword[4*s +: 4]) * int'(w));
      @(posedge clk); #1;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (int'($signed(acc[s])) != model[s]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
