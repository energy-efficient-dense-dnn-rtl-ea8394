// tb_sba_top: one convolution layer end to end, at the design's default
// sizes, driven the way the control processor and DMA would drive it.
//
// 7-bit inputs (32 input channels = 8 lanes x 4, 6 tiles of 4 positions)
// and 7-bit weights (4 output channels) are sent as raw flits over the
// control-unit link: inputs to DMU 0 (RLE compression on), weights to DMU 1
// (raw). After each group the program reads the encoded entry counts and
// makes the DMU stream each slice order to MPU 0 with a multicast mask
// (input low -> columns 0,1; input high -> 2,3; weight low -> 0,2; weight
// high -> 1,3). MPU 0 runs three tiles, the re-issue instruction runs the
// next three without new set-up, results flow to DMU 0 and are read back
// over the control-unit link. The binary map masks tile 4 (output
// speculation), whose outputs must then be 0. Every output must equal
// floor(sum x*w / 64). Counts and requires: multicast flits, skipped zero
// sub-words, lane stalls, re-issued runs, masked tiles, DSM decisions.
module tb_sba_top;
  import sba_pkg::*;
  import tb_model_pkg::*;
  localparam int C = 4, T = 6, NCH = 8 * C, TR = 3;
  localparam coord_t MPU0 = '{y: 2'd1, x: 1'b0};
  localparam coord_t DMU0 = '{y: 2'd0, x: 1'b0};
  localparam coord_t DMU1 = '{y: 2'd0, x: 1'b1};
  localparam coord_t ACU  = '{y: 2'd3, x: 1'b0};

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  instr_t instr = '0;
  logic acu_in_valid = 0, acu_in_ready, acu_out_valid, acu_out_ready = 1;
  flit_t acu_in_flit = '0, acu_out_flit;
  logic [5:0] core_busy;
  logic [1:0][3:0][11:0] enc_cnt;
  logic [1:0][1:0][3:0] dsm_cmp;
  logic [1:0][3:0][3:0] dsm_wskip, dsm_dense;
  logic [3:0][2:0][3:0] stall;
  logic [15:0] fetched, reissued;
  sba_top dut (.*);

  int checks = 0, failures = 0;
  int n_multicast = 0, n_skipped = 0, n_stall = 0, n_masked = 0, n_dsm = 0;
  int x[T][4][NCH], w[NCH][4];
  logic [31:0] rb[$];

  always #5 clk = ~clk;
  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && stall != '0) n_stall++;
  always @(posedge clk) if (rst_n && acu_out_valid && acu_out_ready) rb.push_back(acu_out_flit.data[31:0]);

  task automatic ins(input int core, input int sub, input logic [3:0] op, input int operand);
    @(negedge clk);
    instr_valid = 1;
    instr = '{addr: 7'((core << 3) | sub), opcode: op, operand: 16'(operand)};
    do @(posedge clk); while (!instr_ready);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic repeat_run();
    @(negedge clk);
    instr_valid = 1;
    instr = '{addr: ADDR_REPEAT, opcode: OP_NOP, operand: 16'd0};
    do @(posedge clk); while (!instr_ready);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic idle(input int core);
    repeat (6) @(negedge clk);
    while (core_busy[core]) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic raw(input coord_t d, input int v[4]);
    @(negedge clk);
    acu_in_valid = 1;
    acu_in_flit.dst = d; acu_in_flit.kind = FK_RAW;
    acu_in_flit.data = {12'd0, 13'(v[3]), 13'(v[2]), 13'(v[1]), 13'(v[0])};
    do @(posedge clk); while (!acu_in_ready);
    @(negedge clk); acu_in_valid = 0;
  endtask

  // stream `cnt` words of bank `bank` of DMU `dmu` to MPU 0
  task automatic send(input int dmu, input int bank, input int cnt, input buf_e b, input logic [3:0] cols, input int g);
    pe_mask_t m;
    m = '{arrays: 3'b001, cols: cols, pes: 2'(1 << (g / 4)), lanes: 4'(1 << (g % 4))};
    ins(dmu, 0, OP_D_SRC, bank << 12);
    ins(dmu, 0, OP_D_CNT, cnt);
    ins(dmu, 0, OP_D_DST, (int'(b) << 4) | int'(MPU0));
    ins(dmu, 0, OP_D_DMASK, int'(m));
    ins(dmu, 0, OP_D_DADDR, 0);
    ins(dmu, 0, OP_RUN, 0);
    idle(dmu);
    if ($countones(cols) > 1) n_multicast += cnt;
  endtask

  initial begin
    for (int t = 0; t < T; t++) for (int s = 0; s < 4; s++) for (int ch = 0; ch < NCH; ch++)
      x[t][s][ch] = rand_val(7, 45);
    for (int ch = 0; ch < NCH; ch++) for (int oc = 0; oc < 4; oc++) w[ch][oc] = rand_val(7, 30);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // DMU set-up: 2 slices (7 bit), C channels per tile
    for (int d = 0; d < 2; d++) begin
      ins(d, 0, OP_D_PREC, 2);
      ins(d, 0, OP_D_TILEC, C - 1);
      ins(d, 0, OP_D_ENCB, 16'h0000);
      ins(d, 1, OP_D_ENCB, 16'h1000);
    end
    ins(0, 0, OP_D_CMP, 1);            // inputs: RLE
    ins(1, 0, OP_D_CMP, 2 | 4);        // weights: DSM decides, weight class
    ins(0, 0, OP_D_MASK, 16'hFFEF);    // tile 4 predicted non-maximal
    ins(0, 1, OP_D_MASK, 16'hFFFF);
    ins(0, 2, OP_D_MASK, 16'hFFFF);
    ins(0, 3, OP_D_MASK, 16'hFFFF);
    ins(0, 0, OP_D_MASKEN, 1);
    ins(1, 0, OP_D_MASKEN, 0);

    for (int g = 0; g < 8; g++) begin
      int v[4];
      // inputs of lane group g
      ins(0, 0, OP_CLEAR, 0);
      for (int t = 0; t < T; t++)
        for (int c = 0; c < C; c++) begin
          for (int s = 0; s < 4; s++) v[s] = x[t][s][g*C+c];
          raw(DMU0, v);
        end
      idle(0);
      n_skipped += 2 * T * C - int'(enc_cnt[0][0]) - int'(enc_cnt[0][1]);
      send(0, 0, int'(enc_cnt[0][0]), BUF_IBUF, 4'b0011, g);
      send(0, 1, int'(enc_cnt[0][1]), BUF_IBUF, 4'b1100, g);
      // weights of lane group g: stored raw even if the monitor says compress
      ins(1, 0, OP_CLEAR, 0);
      ins(1, 0, OP_D_CMP, 0 | 4);
      for (int c = 0; c < C; c++) begin
        for (int oc = 0; oc < 4; oc++) v[oc] = w[g*C+c][oc];
        raw(DMU1, v);
      end
      idle(1);
      if (dsm_cmp[1][1] !== 1'bx) n_dsm++;
      checks++;
      if (enc_cnt[1][0] != 12'(C) || enc_cnt[1][1] != 12'(C)) failures++;
      send(1, 0, C, BUF_WBUF, 4'b0101, g);
      send(1, 1, C, BUF_WBUF, 4'b1010, g);
    end

    // MPU 0: 7b x 7b mapping on PE array 0, results to DMU 0 bank 3
    ins(0, 0, OP_D_OBASE, 16'h3000);
    ins(2, 0, OP_M_CIN, (1 << 8) | (C - 1));
    ins(2, 0, OP_M_NTILE, TR);
    ins(2, 0, OP_M_COLCFG, (0 << 12) | (4'b0001 << 8) | (4'b0000 << 4) | 4'b0101);
    ins(2, 0, OP_M_ACT, 0);
    ins(2, 0, OP_M_OUTDST, int'(DMU0));
    ins(2, 0, OP_RUN, 1);              // PE array 0 only
    idle(2);
    repeat_run();                      // next tiles, same configuration
    idle(2);
    idle(0);

    // read back 8 words per tile
    ins(0, 0, OP_D_SRC, 16'h3000);
    ins(0, 0, OP_D_CNT, T * 8);
    ins(0, 0, OP_D_DST, int'(ACU));
    ins(0, 0, OP_RUN, 0);
    idle(0);
    repeat (20) @(negedge clk);

    checks++;
    if (rb.size() != T * 8) begin
      failures++;
      $display("read back %0d words, expected %0d", rb.size(), T * 8);
    end
    for (int t = 0; t < T && rb.size() >= (t + 1) * 8; t++)
      for (int j = 0; j < 16; j++) begin
        int acc, e, got;
        acc = 0;
        if (t != 4) for (int ch = 0; ch < NCH; ch++) acc += x[t][j%4][ch] * w[ch][j/4];
        e = acc >>> 6;
        got = int'($signed(rb[t*8 + j/2][16*(j%2) +: 16]));
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 6) $display("tile %0d out %0d: got %0d expected %0d", t, j, got, e);
        end
        if (t == 4 && got == 0) n_masked++;
      end

    $display("multicast words %0d, skipped sub-words %0d, stall cycles %0d, re-issued runs %0d, masked outputs %0d, dsm reads %0d, instructions %0d",
             n_multicast, n_skipped, n_stall, reissued, n_masked, n_dsm, fetched);
    checks += 6;
    if (n_multicast == 0) failures++;
    if (n_skipped == 0) failures++;
    if (n_stall == 0) failures++;
    if (reissued == 0) failures++;
    if (n_masked != 16) failures++;
    if (n_dsm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
