// mpu_core: matrix processing unit core, the compute engine of the
// accelerator: a NoC switch, an instruction decoder and three PE arrays.
//
// Each PE array has 4 columns x 2 PEs x 4 lanes x 16 signed MACs = 512
// MACs, so a core has 1536. The arrays can work on independent output
// channels or be chained through the Uni-NoC (array 0 -> 1 -> 2) so that
// partial sums of different slice orders are added across arrays. Data
// arrives as buffer-write flits from the Bi-NoC; results leave as output
// flits to a DMU core. `busy` stays high from RUN until the last result
// flit has been handed to the network. The three arrays and the NoC switch
// are as published; the chaining order is this design's reading of the
// published Uni-NoC arrows.
module mpu_core
  import sba_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_valid,
  input  cmd_t  cmd,
  output logic  busy,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit,
  output logic [2:0][3:0] stall
);
  logic [WADDR_W-1:0] cin_m1;
  logic               skip_en, clear, run_d;
  logic [2:0]         run;
  logic [7:0]         ntile;
  logic [2:0][3:0]    shift_en, bypass, first;
  logic [2:0]         transpose, chain, abusy;
  act_e [2:0]         act;
  logic signed [2:0][15:0] bn_scale, bn_bias;
  coord_t             out_dst;

  pe_inst_decoder u_dec (
    .clk, .rst_n, .cmd_valid, .cmd, .cin_m1, .skip_en, .ntile,
    .shift_en, .bypass, .first, .transpose, .chain, .act, .bn_scale, .bn_bias,
    .out_dst, .clear, .run);

  logic [2:0][31:0] we_i, we_w;
  logic [7:0]       waddr;
  logic [SUBW_W-1:0] wword;
  logic [IDX_W-1:0] widx;
  logic [2:0]       res_valid, res_ready;
  psum_vec_t [2:0]  res_data;
  logic             sw_busy;

  noc_switch u_sw (
    .clk, .rst_n, .in_valid, .in_ready, .in_flit,
    .lane_we_i(we_i), .lane_we_w(we_w), .waddr, .wword, .widx,
    .out_dst, .res_valid, .res_ready, .res_data,
    .out_valid, .out_ready, .out_flit, .out_busy(sw_busy));

  // Uni-NoC between arrays: array a-1 chain output -> array a input
  logic [3:0]      cv, cr;
  psum_vec_t [3:0] cd;
  assign cv[0] = 1'b0;
  assign cd[0] = '0;

  for (genvar a = 0; a < 3; a++) begin : g_arr
    pe_array u_arr (
      .clk, .rst_n,
      .lane_we_i(we_i[a]), .lane_we_w(we_w[a]), .waddr, .wword, .widx,
      .skip_en, .cin_m1, .transpose(transpose[a]),
      .shift_en(shift_en[a]), .bypass(bypass[a]), .first(first[a]), .clear,
      .chain(chain[a]), .act(act[a]), .bn_scale(bn_scale[a]), .bn_bias(bn_bias[a]),
      .run(run[a]), .ntile, .busy(abusy[a]), .stall(stall[a]),
      .uni_in_valid(cv[a]), .uni_in_ready(cr[a]), .uni_in_data(cd[a]),
      .chain_valid(cv[a+1]), .chain_ready(cr[a+1]), .chain_data(cd[a+1]),
      .res_valid(res_valid[a]), .res_ready(res_ready[a]), .res_data(res_data[a]));
  end
  assign cr[3] = 1'b1;   // array 2 has no downstream array

  // columns report busy only from the cycle after RUN
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) run_d <= 1'b0;
    else        run_d <= (|run) | (cmd_valid && cmd.opcode == OP_RUN);

  assign busy = run_d || (|run) || (|abusy) || sw_busy;
endmodule
