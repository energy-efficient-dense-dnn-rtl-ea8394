// tb_sbr_unit: every 4-, 7- and 10-bit value and random 13-bit values are
// encoded; the slices must sum back to the value (sum slice_i * 8^i), match
// the reference decomposition, and small negative values must give zero
// upper slices (the point of SBR). Includes the example 1111101 -> 0000,
// 1101 and -25 -> 1101, 1111.
module tb_sbr_unit;
  import sba_pkg::*;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] nslices = 2;
  logic [3:0][12:0] in_data = '0;
  logic [3:0][15:0] subword;
  int checks = 0, failures = 0;
  sbr_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic enc(input int n, input int v[4]);
    @(negedge clk); nslices = 3'(n); in_valid = 1;
    for (int s = 0; s < 4; s++) in_data[s] = 13'(v[s]);
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid) failures++;
    for (int s = 0; s < 4; s++) begin
      int sum;
      sum = 0;
      for (int o = 3; o >= 0; o--) begin
        int sl;
        sl = sx4(subword[o][4*s +: 4]);
        sum = sum * 8 + sl;
        checks++;
        if (sl != sbr_slice(v[s], o, n)) failures++;
      end
      checks++;
      if (sum != v[s]) begin failures++; if (failures < 5) $display("n%0d v%0d sum %0d", n, v[s], sum); end
      if (v[s] < 0 && v[s] >= -8 && n >= 2) begin
        checks++;
        for (int o = 1; o < n; o++) if (subword[o][4*s +: 4] != 0) begin failures++; break; end
      end
    end
  endtask

  initial begin
    int v[4];
    repeat (2) @(posedge clk);
    rst_n = 1;
    v = '{-3, -25, 25, 3};
    enc(2, v);
    checks++; if (subword[1][3:0] != 4'b0000 || subword[0][3:0] != 4'b1101) failures++;
    checks++; if (subword[1][7:4] != 4'b1101 || subword[0][7:4] != 4'b1111) failures++;
    for (int n = 1; n <= 3; n++) begin
      int lim;
      lim = 1 << (3 * n);
      for (int a = -lim; a < lim; a += 4) begin
        v = '{a, a + 1, a + 2, a + 3};
        enc(n, v);
      end
    end
    repeat (500) begin
      for (int s = 0; s < 4; s++) v[s] = int'($urandom_range(8191)) - 4096;
      enc(4, v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
