// tb_act_bn_unit: random vectors through every activation mode and the
// chain mode, checked against an integer model of scale, bias, saturation
// and activation, with random back-pressure on both outputs.
module tb_act_bn_unit;
  import sba_pkg::*;
  logic clk = 0, rst_n = 0, chain = 0, in_valid = 0, in_ready;
  logic chain_valid, chain_ready = 1, res_valid, res_ready = 1;
  act_e act = ACT_NONE;
  logic signed [15:0] scale = 256, bias = 0;
  psum_vec_t in_data = '0, chain_data, res_data;
  int checks = 0, failures = 0;
  act_bn_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int model(int x, int sc, int bi, act_e a);
    longint p;
    int y;
    p = (longint'(x) * sc);
    p = p >>> 8;
    p = p + bi;
    y = (p > 32767) ? 32767 : (p < -32768) ? -32768 : int'(p);
    if (a == ACT_RELU && y < 0) y = 0;
    if (a == ACT_LEAKY && y < 0) y = y >>> 3;
    return y;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      psum_vec_t v;
      @(negedge clk);
      chain = (i % 5 == 4);
      act = act_e'(i % 3);
      scale = 16'(int'($urandom_range(1024)) - 300);
      bias  = 16'(int'($urandom_range(2000)) - 1000);
      for (int j = 0; j < 16; j++) v[j] = 16'($urandom);
      in_data = v; in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
      chain_ready = 0; res_ready = 0;
      repeat ($urandom_range(2)) @(negedge clk);
      chain_ready = 1; res_ready = 1;
      #1;
      checks++;
      if (chain ? !chain_valid : !res_valid) failures++;
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (chain) begin
          if (chain_data[j] != v[j]) failures++;
        end else if (int'(res_data[j]) != model(int'(v[j]), int'(scale), int'(bias), act)) failures++;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
