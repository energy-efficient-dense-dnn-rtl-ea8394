// pe_array: four PE columns chained by the Uni-NoC, ending in the
// activation / batch-norm unit.
//
// Column 0 is the upstream end: it takes partial sums from the previous PE
// array when arrays are chained (`first[0]` low), and column 3 hands the
// finished vector to the act/BN unit. The usual mapping gives the low slice
// orders to the upstream columns and the high orders to the downstream
// ones, so each hop can drop three low bits (>>3) before the next order is
// added. All four columns share the run command, the tile count and the
// input-channel count; shift, bypass, first and transpose are per column.
// The 4-column, 2-PE-per-column arrangement is published. Lane write enables
// are 32 bits: column c, PE p, lane l at bit c*8+p*4+l.
module pe_array
  import sba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        lane_we_i,
  input  logic [31:0]        lane_we_w,
  input  logic [7:0]         waddr,
  input  logic [SUBW_W-1:0]  wword,
  input  logic [IDX_W-1:0]   widx,
  input  logic               skip_en,
  input  logic [WADDR_W-1:0] cin_m1,
  input  logic               transpose,
  input  logic [3:0]         shift_en,
  input  logic [3:0]         bypass,
  input  logic [3:0]         first,
  input  logic               clear,
  input  logic               chain,
  input  act_e               act,
  input  logic signed [15:0] bn_scale,
  input  logic signed [15:0] bn_bias,
  input  logic               run,
  input  logic [7:0]         ntile,
  output logic               busy,
  output logic [3:0]         stall,
  input  logic               uni_in_valid,
  output logic               uni_in_ready,
  input  psum_vec_t          uni_in_data,
  output logic               chain_valid,
  input  logic               chain_ready,
  output psum_vec_t          chain_data,
  output logic               res_valid,
  input  logic               res_ready,
  output psum_vec_t          res_data
);
  logic [4:0] v, r;
  psum_vec_t [4:0] d;
  logic [3:0] cbusy;
  logic abn_busy;

  assign v[0] = uni_in_valid;
  assign d[0] = uni_in_data;
  assign uni_in_ready = r[0];

  for (genvar c = 0; c < 4; c++) begin : g_col
    pe_column u_col (
      .clk, .rst_n,
      .lane_we_i(lane_we_i[c*8 +: 8]), .lane_we_w(lane_we_w[c*8 +: 8]),
      .waddr, .wword, .widx, .skip_en, .cin_m1, .transpose,
      .shift_en(shift_en[c]), .bypass(bypass[c]), .first(first[c]), .clear,
      .run, .ntile, .busy(cbusy[c]), .stall(stall[c]),
      .uni_in_valid(v[c]), .uni_in_ready(r[c]), .uni_in_data(d[c]),
      .uni_out_valid(v[c+1]), .uni_out_ready(r[c+1]), .uni_out_data(d[c+1]));
  end

  act_bn_unit u_abn (
    .clk, .rst_n, .chain, .act, .scale(bn_scale), .bias(bn_bias),
    .in_valid(v[4]), .in_ready(r[4]), .in_data(d[4]),
    .chain_valid, .chain_ready, .chain_data,
    .res_valid, .res_ready, .res_data);

  assign abn_busy = chain_valid || res_valid;
  assign busy = (|cbusy) || (|v[4:1]) || abn_busy;
endmodule
