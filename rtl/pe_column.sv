// pe_column: one PE column, two PEs (eight lanes) and their accumulation
// unit, plus the tile sequencer.
//
// `run` starts `ntile` tiles. Every lane walks through the tiles on its own:
// it is started again as soon as it is idle, has tiles left and its previous
// result has been taken by the accumulation unit. Lanes therefore run up to
// one tile apart, and a lane that must wait for a latch counts a stall cycle
// (`stall`). The column's results leave through the Uni-NoC ports of the
// accumulation unit. `busy` is high while tiles are left, a lane runs or a
// result is still on its way into the OBUF; `obuf` tiles may still sit in
// the OBUF afterwards, waiting for the downstream columns.
//
// The two PEs and one accumulation unit per column, and the lane-level early
// start, are as published; the sequencer itself is this design's own.
module pe_column
  import sba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // buffer writes: lanes of PE0 in [3:0], PE1 in [7:4]
  input  logic [7:0]         lane_we_i,
  input  logic [7:0]         lane_we_w,
  input  logic [7:0]         waddr,
  input  logic [SUBW_W-1:0]  wword,
  input  logic [IDX_W-1:0]   widx,
  // configuration
  input  logic               skip_en,
  input  logic [WADDR_W-1:0] cin_m1,
  input  logic               transpose,
  input  logic               shift_en,
  input  logic               bypass,
  input  logic               first,
  input  logic               clear,
  // control
  input  logic               run,
  input  logic [7:0]         ntile,
  output logic               busy,
  output logic               stall,
  // Uni-NoC
  input  logic               uni_in_valid,
  output logic               uni_in_ready,
  input  psum_vec_t          uni_in_data,
  output logic               uni_out_valid,
  input  logic               uni_out_ready,
  output psum_vec_t          uni_out_data
);
  logic [7:0] lane_busy, lane_done, lane_hold, start;
  logic [7:0][7:0] left;
  logic signed [7:0][NOUT-1:0][ACC_W-1:0] lane_acc;
  logic acc_active;

  for (genvar p = 0; p < 2; p++) begin : g_pe
    logic signed [3:0][NOUT-1:0][ACC_W-1:0] a;
    for (genvar l = 0; l < 4; l++) begin : g_l
      assign lane_acc[p*4+l] = a[l];
    end
    pe u_pe (
      .clk, .rst_n,
      .lane_we_i(lane_we_i[p*4 +: 4]), .lane_we_w(lane_we_w[p*4 +: 4]),
      .waddr, .wword, .widx, .skip_en, .cin_m1, .clear,
      .start(start[p*4 +: 4]), .busy(lane_busy[p*4 +: 4]),
      .done(lane_done[p*4 +: 4]), .acc(a));
  end

  always_comb begin
    stall = 1'b0;
    for (int i = 0; i < 8; i++) begin
      start[i] = !bypass && (left[i] != '0) && !lane_busy[i] && !lane_hold[i];
      if ((left[i] != '0) && !lane_busy[i] && lane_hold[i]) stall = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) left <= '0;
    else
      for (int i = 0; i < 8; i++) begin
        if (run && !bypass) left[i] <= ntile;
        else if (start[i])  left[i] <= left[i] - 1'b1;
      end
  end

  assign busy = (left != '0) || (|lane_busy) || acc_active;

  accum_unit u_acc (
    .clk, .rst_n, .transpose, .shift_en, .bypass, .first,
    .lane_done, .lane_acc, .lane_hold,
    .uni_in_valid, .uni_in_ready, .uni_in_data,
    .uni_out_valid, .uni_out_ready, .uni_out_data,
    .active(acc_active));
endmodule
