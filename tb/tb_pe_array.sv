// tb_pe_array: a 7-bit x 7-bit convolution tile set on one PE array.
// Inputs and weights are SBR-encoded (two slices each) by the reference
// model; column 0 gets (input low, weight low), column 1 (low, high),
// column 2 (high, low), column 3 (high, high), so the Uni-NoC chain with
// >>3 after columns 0 and 2 must produce floor(sum x*w / 64) exactly. The
// second pass uses batch-norm scale 0.5 and ReLU. Skipping is on and the
// data is partly zero, so lanes finish at different times.
module tb_pe_array;
  import sba_pkg::*;
  import tb_model_pkg::*;
  localparam int C = 6, T = 5, NCH = 8 * C;
  logic clk = 0, rst_n = 0;
  logic [31:0] lane_we_i = 0, lane_we_w = 0;
  logic [7:0] waddr = 0, ntile = 0;
  logic [15:0] wword = 0;
  logic [3:0] widx = 0;
  logic skip_en = 1, transpose = 0, clear = 0, chain = 0, run = 0, busy;
  logic [3:0] shift_en = 4'b0101, bypass = 0, first = 4'b0001, stall;
  logic [4:0] cin_m1 = 5'(C - 1);
  act_e act = ACT_NONE;
  logic signed [15:0] bn_scale = 256, bn_bias = 0;
  logic uni_in_valid = 0, uni_in_ready, chain_valid, chain_ready = 1, res_valid, res_ready = 1;
  psum_vec_t uni_in_data = '0, chain_data, res_data;
  int checks = 0, failures = 0, stalls = 0;
  int x[T][4][NCH], w[NCH][4];
  pe_array dut (.*);
  always #5 clk = ~clk;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (stall != 0) stalls++;

  task automatic wr(input logic [31:0] li, input logic [31:0] lw, input int a, input logic [15:0] d, input logic [3:0] ix);
    @(negedge clk); lane_we_i = li; lane_we_w = lw; waddr = 8'(a); wword = d; widx = ix;
    @(negedge clk); lane_we_i = 0; lane_we_w = 0;
  endtask

  task automatic load();
    for (int col = 0; col < 4; col++) begin
      int io, wo;
      io = col / 2; wo = col % 2;
      for (int g = 0; g < 8; g++) begin
        int p;
        logic [31:0] m;
        m = 32'(1) << (col * 8 + g);
        p = 0;
        for (int c = 0; c < C; c++) begin
          logic [15:0] ww;
          for (int oc = 0; oc < 4; oc++) ww[4*oc +: 4] = s4(sbr_slice(w[g*C+c][oc], wo, 2));
          wr(0, m, c, ww, 0);
        end
        for (int t = 0; t < T; t++) begin
          logic [15:0] sw[];
          stream_t st;
          sw = new[C];
          st.word.delete(); st.idx.delete();
          for (int c = 0; c < C; c++)
            for (int s = 0; s < 4; s++) sw[c][4*s +: 4] = s4(sbr_slice(x[t][s][g*C+c], io, 2));
          rle(st, sw, 1);
          foreach (st.word[k]) begin wr(m, 0, p, st.word[k], st.idx[k]); p++; end
        end
      end
    end
  endtask

  task automatic go(input act_e a, input int sc);
    int got;
    @(negedge clk); act = a; bn_scale = 16'(sc); clear = 1; @(negedge clk); clear = 0;
    load();
    @(negedge clk); ntile = 8'(T); run = 1; @(negedge clk); run = 0;
    got = 0;
    while (got < T) begin
      @(posedge clk);
      if (res_valid && res_ready) begin
        for (int j = 0; j < 16; j++) begin
          int acc, e;
          acc = 0;
          for (int ch = 0; ch < NCH; ch++) acc += x[got][j%4][ch] * w[ch][j/4];
          e = acc >>> 6;
          e = (e * sc) >>> 8;
          if (a == ACT_RELU && e < 0) e = 0;
          checks++;
          if (int'(res_data[j]) != e) begin
            failures++;
            if (failures < 5) $display("t%0d j%0d got %0d exp %0d", got, j, res_data[j], e);
          end
        end
        got++;
      end
    end
  endtask

  initial begin
    for (int t = 0; t < T; t++) for (int s = 0; s < 4; s++) for (int ch = 0; ch < NCH; ch++)
      x[t][s][ch] = rand_val(7, 40);
    for (int ch = 0; ch < NCH; ch++) for (int oc = 0; oc < 4; oc++) w[ch][oc] = rand_val(7, 30);
    repeat (2) @(posedge clk);
    rst_n = 1;
    go(ACT_NONE, 256);
    go(ACT_RELU, 128);
    repeat (5) @(negedge clk);
    checks++; if (busy) failures++;
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
