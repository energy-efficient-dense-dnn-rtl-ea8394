// tb_signed_mac: random products accumulated against an integer model of a
// 12-bit wrapping register; checks clear, hold and one-cycle latency.
module tb_signed_mac;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [3:0] a = 0, w = 0;
  logic signed [11:0] acc;
  int checks = 0, failures = 0, model = 0;
  signed_mac dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en  = ($urandom_range(3) != 0);
      clr = ($urandom_range(15) == 0);
      a = 4'($urandom); w = 4'($urandom);
      if (en) model = clr ? int'(a) * int'(w) : wrap12(model + int'(a) * int'(w));
      model = wrap12(model);
      @(posedge clk); #1;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        if (failures < 5) $display("mismatch %0d vs %0d", acc, model);
      end
    end
    // extreme: -8 * -8 repeated
    @(negedge clk); en = 1; clr = 1; a = -8; w = -8; @(posedge clk); #1;
    checks++; if (acc != 64) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
