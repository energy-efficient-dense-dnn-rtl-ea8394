// tb_dsm_unit: feeds zero flags with known per-order densities for inputs
// and weights and checks the counts-based decisions: compression above
// 20 % zeros, skip on weights when they are sparser, dense when neither
// side passes 20 %; and that clear restarts the counts.
module tb_dsm_unit;
  logic clk = 0, rst_n = 0, clear = 0, cls = 0, in_valid = 0;
  logic [3:0] order_valid = 4'hF, zero = 0;
  logic [1:0][3:0] cmp_en;
  logic [3:0][3:0] wskip, dense;
  int checks = 0, failures = 0;
  int zi[4], zw[4];
  dsm_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic feed(input bit c, input int pct[4], input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk); cls = c; in_valid = 1;
      for (int o = 0; o < 4; o++) zero[o] = ((k * 100) / n) < pct[o];
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic check();
    for (int o = 0; o < 4; o++) begin
      checks += 2;
      if (cmp_en[0][o] != (zi[o] > 20)) failures++;
      if (cmp_en[1][o] != (zw[o] > 20)) failures++;
    end
    for (int i = 0; i < 4; i++) for (int w = 0; w < 4; w++) begin
      checks += 2;
      if (wskip[i][w] != (zw[w] > zi[i])) failures++;
      if (dense[i][w] != (zi[i] <= 20 && zw[w] <= 20)) failures++;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (6) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int o = 0; o < 4; o++) begin
        zi[o] = 5 * $urandom_range(19); zw[o] = 5 * $urandom_range(19);
        if (zi[o] == zw[o]) zw[o] += 1;
        if (zi[o] == 20) zi[o] = 21;
        if (zw[o] == 20) zw[o] = 19;
      end
      feed(0, zi, 100);
      feed(1, zw, 100);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
