// tb_uni_noc_router: random valid and ready on both sides; every packet
// must come out once, in order and unchanged.
module tb_uni_noc_router;
  import sba_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  psum_vec_t in_data = '0, out_data;
  psum_vec_t q[$];
  int checks = 0, failures = 0, sent = 0, got = 0;
  uni_noc_router dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) failures++;
      if (q.size() != 0) void'(q.pop_front());
      got++;
    end
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(1);
        for (int j = 0; j < 16; j++) in_data[j] = 16'($urandom);
      end
      out_ready = ($urandom_range(3) != 0);
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent || got < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
