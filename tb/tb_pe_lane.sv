// tb_pe_lane: tiles of random, partly zero input sub-words are compressed
// with the reference RLE, written into the lane's buffers and run one by
// one. Each of the 16 accumulators must equal the integer dot product over
// the tile's channels, and a tile must take (stored entries + 3) cycles
// from start to done, i.e. zero sub-words cost no cycle. Also runs the
// dense mode (skipping off, every sub-word stored).
module tb_pe_lane;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we_i = 0, we_w = 0, skip_en = 1, clear = 0, start = 0, busy, done;
  logic [7:0] waddr = 0;
  logic [15:0] wword = 0;
  logic [3:0] widx = 0;
  logic [4:0] cin_m1 = 0;
  logic signed [15:0][11:0] acc;
  int checks = 0, failures = 0, skipped = 0;
  pe_lane dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic wr(input bit isw, input int a, input logic [15:0] d, input logic [3:0] ix);
    @(negedge clk); we_i = !isw; we_w = isw; waddr = 8'(a); wword = d; widx = ix;
    @(negedge clk); we_i = 0; we_w = 0;
  endtask

  task automatic run_case(input int C, input int T, input bit skip, input int zp);
    logic [15:0] sw[][], wt[];
    stream_t st[];
    int p, exp[16], cyc;
    sw = new[T]; st = new[T]; wt = new[C];
    @(negedge clk); cin_m1 = 5'(C - 1); skip_en = skip; clear = 1;
    @(negedge clk); clear = 0;
    foreach (wt[c]) begin wt[c] = 16'($urandom); wr(1, c, wt[c], 0); end
    p = 0;
    for (int t = 0; t < T; t++) begin
      sw[t] = new[C];
      foreach (sw[t][c]) sw[t][c] = ($urandom_range(99) < zp) ? 16'd0 : 16'($urandom);
      rle(st[t], sw[t], skip);
      foreach (st[t].word[k]) begin wr(0, p, st[t].word[k], st[t].idx[k]); p++; end
      skipped += C - st[t].word.size();
    end
    for (int t = 0; t < T; t++) begin
      for (int j = 0; j < 16; j++) begin
        exp[j] = 0;
        for (int c = 0; c < C; c++)
          exp[j] += sx4(sw[t][c][4*(j%4) +: 4]) * sx4(wt[c][4*(j/4) +: 4]);
        exp[j] = wrap12(exp[j]);
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (int'($signed(acc[j])) != exp[j]) begin
          failures++;
          if (failures < 6) $display("tile %0d out %0d: %0d vs %0d", t, j, $signed(acc[j]), exp[j]);
        end
      end
      checks++;
      if (cyc != st[t].word.size() + 3) begin
        failures++;
        $display("tile %0d: %0d cycles, expected %0d", t, cyc, st[t].word.size() + 3);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_case(8, 4, 1, 50);
    run_case(32, 3, 1, 70);
    run_case(20, 5, 1, 95);
    run_case(1, 3, 1, 50);
    run_case(16, 4, 0, 50);
    run_case(32, 6, 0, 0);
    run_case(32, 4, 1, 0);
    checks++;
    if (skipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
