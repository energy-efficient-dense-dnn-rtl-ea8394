// tb_accum_unit: eight lane models finish tiles at random times (each
// waits for its latch to be free, as the real lanes do). The tile sums,
// the OBUF path, the add of upstream partial sums, the >>3, the transpose
// of weight-skipping mode and the bypass are checked against integer
// models, with random back-pressure downstream. Counts the cycles in which
// a lane had to hold its result.
module tb_accum_unit;
  import sba_pkg::*;
  import tb_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic transpose = 0, shift_en = 0, bypass = 0, first = 1;
  logic [7:0] lane_done = 0, lane_hold;
  logic signed [7:0][15:0][11:0] lane_acc;
  logic uni_in_valid = 0, uni_in_ready, uni_out_valid, uni_out_ready = 1, active;
  psum_vec_t uni_in_data = '0, uni_out_data;
  int checks = 0, failures = 0, holds = 0;
  int tiles[$][16];
  psum_vec_t ups[$];
  accum_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int vals[8][$][16];
  int T;

  for (genvar i = 0; i < 8; i++) begin : g_lane
    initial begin
      lane_acc[i] = '0;
      wait (rst_n);
      forever begin
        wait (vals[i].size() != 0);
        repeat ($urandom_range(6)) @(negedge clk);
        while (lane_hold[i]) @(negedge clk);
        for (int j = 0; j < 16; j++) lane_acc[i][j] = 12'(vals[i][0][j]);
        void'(vals[i].pop_front());
        lane_done[i] = 1; @(negedge clk); lane_done[i] = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n) holds += $countones(lane_hold & ~lane_done);

  task automatic run(input bit tr, input bit sh, input bit fi, input bit bp, input int n);
    int exp[16], got;
    @(negedge clk); transpose = tr; shift_en = sh; first = fi; bypass = bp;
    ups.delete();
    for (int t = 0; t < n; t++) begin
      int s[16];
      for (int j = 0; j < 16; j++) s[j] = 0;
      for (int i = 0; i < 8; i++) begin
        int v[16];
        for (int j = 0; j < 16; j++) begin v[j] = int'($urandom_range(4095)) - 2048; s[j] += v[j]; end
        if (!bp) vals[i].push_back(v);
      end
      tiles.push_back(s);
    end
    fork
      begin
        for (int t = 0; t < n; t++) begin
          psum_vec_t u;
          for (int j = 0; j < 16; j++) u[j] = 16'(int'($urandom_range(8000)) - 4000);
          ups.push_back(u);
          if (!fi || bp) begin
            @(negedge clk); uni_in_valid = 1; uni_in_data = u;
            do @(posedge clk); while (!uni_in_ready);
            @(negedge clk); uni_in_valid = 0;
          end
        end
      end
      begin
        got = 0;
        while (got < n) begin
          @(negedge clk); uni_out_ready = ($urandom_range(2) != 0);
          @(posedge clk);
          if (uni_out_valid && uni_out_ready) begin
            for (int j = 0; j < 16; j++) begin
              int jj, v;
              jj = tr ? ((j % 4) * 4 + j / 4) : j;
              if (bp) v = int'(ups[got][j]);
              else begin
                v = tiles[got][jj] + (fi ? 0 : int'(ups[got][j]));
                v = sh ? (v >>> 3) : (v > 32767 ? 32767 : (v < -32768 ? -32768 : v));
              end
              checks++;
              if (int'(uni_out_data[j]) != v) begin
                failures++;
                if (failures < 5) $display("t%0d j%0d got %0d exp %0d", got, j, uni_out_data[j], v);
              end
            end
            got++;
          end
        end
      end
    join
    tiles.delete();
    @(negedge clk); uni_out_ready = 1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 0, 1, 0, 30);
    run(0, 1, 0, 0, 60);
    run(1, 1, 1, 0, 10);
    run(0, 0, 0, 0, 10);
    run(0, 0, 0, 1, 10);
    checks++;
    if (holds == 0) failures++;
    $display("holds %0d", holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
