// tb_pe: four lanes loaded with different compressed data through the
// shared write port with lane enables, started together; each lane's 16
// results must match its own dot products, so a write reaching the wrong
// lane or a mixed-up lane output is caught.
module tb_pe;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] lane_we_i = 0, lane_we_w = 0, start = 0, busy, done;
  logic [7:0] waddr = 0;
  logic [15:0] wword = 0;
  logic [3:0] widx = 0;
  logic skip_en = 1, clear = 0;
  logic [4:0] cin_m1 = 0;
  logic signed [3:0][15:0][11:0] acc;
  int checks = 0, failures = 0;
  pe dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input logic [3:0] li, input logic [3:0] lw, input int a, input logic [15:0] d, input logic [3:0] ix);
    @(negedge clk); lane_we_i = li; lane_we_w = lw; waddr = 8'(a); wword = d; widx = ix;
    @(negedge clk); lane_we_i = 0; lane_we_w = 0;
  endtask

  initial begin
    int C;
    logic [15:0] sw[4][], wt[4][];
    stream_t st[4];
    logic [3:0] seen;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      C = 4 + rep * 7;
      @(negedge clk); cin_m1 = 5'(C - 1); clear = 1; @(negedge clk); clear = 0;
      for (int l = 0; l < 4; l++) begin
        sw[l] = new[C]; wt[l] = new[C];
        st[l].word.delete(); st[l].idx.delete();
        foreach (sw[l][c]) begin
          sw[l][c] = ($urandom_range(99) < 40) ? 16'd0 : 16'($urandom);
          wt[l][c] = 16'($urandom);
          wr(0, 4'(1 << l), c, wt[l][c], 0);
        end
        rle(st[l], sw[l], 1);
        foreach (st[l].word[k]) wr(4'(1 << l), 0, k, st[l].word[k], st[l].idx[k]);
      end
      @(negedge clk); start = 4'hF; @(negedge clk); start = 0;
      seen = 0;
      while (seen != 4'hF) begin
        for (int l = 0; l < 4; l++)
          if (done[l]) begin
            seen[l] = 1;
            for (int j = 0; j < 16; j++) begin
              int e;
              e = 0;
              for (int c = 0; c < C; c++) e += sx4(sw[l][c][4*(j%4) +: 4]) * sx4(wt[l][c][4*(j/4) +: 4]);
              checks++;
              if (int'($signed(acc[l][j])) != wrap12(e)) failures++;
            end
          end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
