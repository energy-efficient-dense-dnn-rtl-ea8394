// tb_pe_column: eight lanes with different sparse data run several tiles;
// the column's Uni-NoC output must be, per tile, the sum over lanes of the
// dot products (first column of a chain, no shift). Lanes finish at
// different times, so the test also requires that lanes had to wait for a
// latch (stall) at least once, and that `busy` drops at the end.
module tb_pe_column;
  import sba_pkg::*;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] lane_we_i = 0, lane_we_w = 0, waddr = 0, ntile = 0;
  logic [15:0] wword = 0;
  logic [3:0] widx = 0;
  logic skip_en = 1, transpose = 0, shift_en = 0, bypass = 0, first = 1, clear = 0, run = 0;
  logic [4:0] cin_m1 = 0;
  logic busy, stall, uni_in_valid = 0, uni_in_ready, uni_out_valid, uni_out_ready = 1;
  psum_vec_t uni_in_data = '0, uni_out_data;
  int checks = 0, failures = 0, stalls = 0;
  pe_column dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (stall) stalls++;

  task automatic wr(input logic [7:0] li, input logic [7:0] lw, input int a, input logic [15:0] d, input logic [3:0] ix);
    @(negedge clk); lane_we_i = li; lane_we_w = lw; waddr = 8'(a); wword = d; widx = ix;
    @(negedge clk); lane_we_i = 0; lane_we_w = 0;
  endtask

  initial begin
    int C, T, exp[16], got;
    logic [15:0] sw[8][8][32], wt[8][32], tmp[];
    repeat (2) @(posedge clk);
    rst_n = 1;
    C = 12; T = 6;
    @(negedge clk); cin_m1 = 5'(C - 1); clear = 1; @(negedge clk); clear = 0;
    for (int l = 0; l < 8; l++) begin
      int p;
      p = 0;
      for (int c = 0; c < C; c++) begin wt[l][c] = 16'($urandom); wr(0, 8'(1 << l), c, wt[l][c], 0); end
      for (int t = 0; t < T; t++) begin
        stream_t st;
        int zp;
        zp = (l * 13 + t * 29) % 90;
        st.word.delete(); st.idx.delete();
        tmp = new[C];
        for (int c = 0; c < C; c++) begin
          sw[l][t][c] = ($urandom_range(99) < zp) ? 16'd0 : 16'($urandom);
          tmp[c] = sw[l][t][c];
        end
        rle(st, tmp, 1);
        foreach (st.word[k]) begin wr(8'(1 << l), 0, p, st.word[k], st.idx[k]); p++; end
      end
    end
    @(negedge clk); ntile = 8'(T); run = 1; @(negedge clk); run = 0;
    got = 0;
    while (got < T) begin
      @(posedge clk);
      if (uni_out_valid && uni_out_ready) begin
        for (int j = 0; j < 16; j++) begin
          exp[j] = 0;
          for (int l = 0; l < 8; l++) begin
            int e;
            e = 0;
            for (int c = 0; c < C; c++) e += sx4(sw[l][got][c][4*(j%4) +: 4]) * sx4(wt[l][c][4*(j/4) +: 4]);
            exp[j] += wrap12(e);
          end
          checks++;
          if (int'(uni_out_data[j]) != exp[j]) begin failures++; if (failures < 4) $display("t%0d j%0d %0d vs %0d", got, j, uni_out_data[j], exp[j]); end
        end
        got++;
      end
    end
    repeat (4) @(negedge clk);
    checks++; if (busy) failures++;
    checks++; if (stalls == 0) failures++;
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
