// pe: processing element of four lanes (pe_lane), each lane working on its
// own input channels against its own weights, so one PE holds 64 signed MAC
// units (as published: four MAC-array columns of four arrays of four MACs).
// Buffer writes arrive on one shared port with a per-lane enable mask; each
// lane is started and finishes on its own, which is what lets a lane that
// finished early move to the next tile. Outputs are the lanes' accumulators.
module pe
  import sba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [3:0]         lane_we_i,
  input  logic [3:0]         lane_we_w,
  input  logic [7:0]         waddr,
  input  logic [SUBW_W-1:0]  wword,
  input  logic [IDX_W-1:0]   widx,
  input  logic               skip_en,
  input  logic [WADDR_W-1:0] cin_m1,
  input  logic               clear,
  input  logic [3:0]         start,
  output logic [3:0]         busy,
  output logic [3:0]         done,
  output logic signed [3:0][NOUT-1:0][ACC_W-1:0] acc
);
  for (genvar l = 0; l < 4; l++) begin : g_lane
    pe_lane u_lane (
      .clk, .rst_n,
      .we_i(lane_we_i[l]), .we_w(lane_we_w[l]), .waddr, .wword, .widx,
      .skip_en, .cin_m1, .clear,
      .start(start[l]), .busy(busy[l]), .done(done[l]), .acc(acc[l]));
  end
endmodule
