// tb_rle_unit: random sparse sub-word streams, cut into tiles, with random
// masking; the output is decoded (index = zeros skipped) and must rebuild
// the masked stream exactly. Also checks that compression stores fewer
// entries than there are sub-words, and raw mode stores all of them.
module tb_rle_unit;
  logic clk = 0, rst_n = 0, clear = 0, cmp_en = 1, in_valid = 0, mask = 1, last = 0;
  logic [15:0] in_word = 0, out_word;
  logic [3:0] out_idx;
  logic out_valid, in_zero;
  int checks = 0, failures = 0, nin = 0, nout = 0;
  logic [15:0] ref_q[$], dec_q[$];
  rle_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n && out_valid) begin
    nout++;
    for (int k = 0; k < int'(out_idx); k++) dec_q.push_back(16'd0);
    dec_q.push_back(out_word);
  end

  task automatic stream(input bit cmp, input int ntiles, input int tc, input int zp);
    @(negedge clk); cmp_en = cmp; clear = 1; @(negedge clk); clear = 0;
    ref_q.delete(); dec_q.delete(); nin = 0; nout = 0;
    for (int t = 0; t < ntiles; t++) begin
      bit mk;
      mk = ($urandom_range(4) != 0);
      for (int c = 0; c < tc; c++) begin
        @(negedge clk);
        in_valid = 1; mask = mk; last = (c == tc - 1);
        in_word = ($urandom_range(99) < zp) ? 16'd0 : 16'($urandom_range(65535, 1));
        ref_q.push_back(mk ? in_word : 16'd0);
        nin++;
      end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    checks++;
    if (dec_q.size() != ref_q.size()) failures++;
    else foreach (ref_q[i]) begin checks++; if (dec_q[i] != ref_q[i]) failures++; end
    checks++;
    if (cmp ? !(nout < nin) : (nout != nin)) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    stream(1, 20, 32, 60);
    stream(1, 10, 31, 98);
    stream(1, 30, 7, 30);
    stream(0, 10, 16, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
