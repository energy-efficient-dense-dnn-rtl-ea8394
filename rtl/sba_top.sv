// sba_top: the signed bit-slice accelerator.
//
// Two DMU cores and four MPU cores sit on a 2 x 3 bidirectional mesh
// (Bi-NoC):
//        x=0        x=1
//   y=0  DMU 0      DMU 1       <- control unit link on router (0,0) north
//   y=1  MPU 0      MPU 1
//   y=2  MPU 2      MPU 3
// The control processor, DMA and external-memory interface are outside this
// module: their side is the instruction port (27-bit instructions into the
// top decoder) and one Bi-NoC link, on which raw data enters the DMUs and
// anything addressed to y = 3 leaves. Per-core busy flags, the DMUs'
// encoded-entry counts and sparsity-monitor decisions, the lane stall flags
// and the decoder's counters are status outputs. Inside each MPU core, PE
// arrays and columns are linked by the unidirectional partial-sum network
// (Uni-NoC). The core placement follows the published block diagram; the
// coordinates themselves are this design's choice.
// Timing: an instruction takes effect the cycle after instr_ready; a flit
// needs one cycle per router hop. A lint tool may report a combinational
// loop through the packed ready/valid arrays that connect the routers; it
// is not a real loop, since every router's in_ready depends only on its own
// FIFO occupancy, never on the ready of the next hop.
module sba_top
  import sba_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // instructions from the control processor
  input  logic   instr_valid,
  output logic   instr_ready,
  input  instr_t instr,
  // Bi-NoC link to the control unit (DMA side)
  input  logic   acu_in_valid,
  output logic   acu_in_ready,
  input  flit_t  acu_in_flit,
  output logic   acu_out_valid,
  input  logic   acu_out_ready,
  output flit_t  acu_out_flit,
  // status
  output logic [5:0] core_busy,
  output logic [1:0][MAX_SLICES-1:0][11:0] enc_cnt,
  output logic [1:0][1:0][MAX_SLICES-1:0] dsm_cmp,
  output logic [1:0][MAX_SLICES-1:0][MAX_SLICES-1:0] dsm_wskip,
  output logic [1:0][MAX_SLICES-1:0][MAX_SLICES-1:0] dsm_dense,
  output logic [3:0][2:0][3:0] stall,
  output logic [15:0] fetched,
  output logic [15:0] reissued
);
  localparam int L = 0, N = 1, S = 2, E = 3, W = 4;

  logic [5:0] cmd_valid;
  cmd_t       cmd;

  top_inst_decoder #(.NCORE(6)) u_top_dec (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr,
    .core_busy, .cmd_valid, .cmd, .fetched, .reissued);

  // router ports, indexed [x][y][port]
  logic  [1:0][2:0][4:0] iv, ir, ov, orr;
  flit_t [1:0][2:0][4:0] ifl, ofl;

  for (genvar x = 0; x < 2; x++) begin : g_x
    for (genvar y = 0; y < 3; y++) begin : g_y
      binoc_router #(.X(x), .Y(y)) u_br (
        .clk, .rst_n,
        .in_valid(iv[x][y]), .in_ready(ir[x][y]), .in_flit(ifl[x][y]),
        .out_valid(ov[x][y]), .out_ready(orr[x][y]), .out_flit(ofl[x][y]));

      // north
      if (y == 0 && x == 0) begin : g_acu
        assign iv[x][y][N]  = acu_in_valid;
        assign ifl[x][y][N] = acu_in_flit;
        assign acu_in_ready = ir[x][y][N];
        assign acu_out_valid = ov[x][y][N];
        assign acu_out_flit  = ofl[x][y][N];
        assign orr[x][y][N]  = acu_out_ready;
      end else if (y == 0) begin : g_nedge
        assign iv[x][y][N]  = 1'b0;
        assign ifl[x][y][N] = '0;
        assign orr[x][y][N] = 1'b1;
      end else begin : g_nlink
        assign iv[x][y][N]    = ov[x][y-1][S];
        assign ifl[x][y][N]   = ofl[x][y-1][S];
        assign orr[x][y-1][S] = ir[x][y][N];
      end
      // south edge
      if (y == 2) begin : g_sedge
        assign iv[x][y][S]  = 1'b0;
        assign ifl[x][y][S] = '0;
        assign orr[x][y][S] = 1'b1;
      end else begin : g_slink
        assign iv[x][y][S]    = ov[x][y+1][N];
        assign ifl[x][y][S]   = ofl[x][y+1][N];
        assign orr[x][y+1][N] = ir[x][y][S];
      end
      // west / east
      if (x == 0) begin : g_wedge
        assign iv[x][y][W]  = 1'b0;
        assign ifl[x][y][W] = '0;
        assign orr[x][y][W] = 1'b1;
        assign iv[x][y][E]    = ov[1][y][W];
        assign ifl[x][y][E]   = ofl[1][y][W];
        assign orr[1][y][W]   = ir[x][y][E];
      end else begin : g_eedge
        assign iv[x][y][E]  = 1'b0;
        assign ifl[x][y][E] = '0;
        assign orr[x][y][E] = 1'b1;
        assign iv[x][y][W]    = ov[0][y][E];
        assign ifl[x][y][W]   = ofl[0][y][E];
        assign orr[0][y][E]   = ir[x][y][W];
      end
    end
  end

  // DMU cores at (x, 0)
  for (genvar d = 0; d < 2; d++) begin : g_dmu
    dmu_core u_dmu (
      .clk, .rst_n, .cmd_valid(cmd_valid[d]), .cmd, .busy(core_busy[d]),
      .in_valid(ov[d][0][L]), .in_ready(orr[d][0][L]), .in_flit(ofl[d][0][L]),
      .out_valid(iv[d][0][L]), .out_ready(ir[d][0][L]), .out_flit(ifl[d][0][L]),
      .enc_cnt(enc_cnt[d]), .dsm_cmp(dsm_cmp[d]), .dsm_wskip(dsm_wskip[d]),
      .dsm_dense(dsm_dense[d]));
  end

  // MPU cores: MPU n at (n % 2, 1 + n / 2)
  for (genvar m = 0; m < 4; m++) begin : g_mpu
    localparam int MX = m % 2;
    localparam int MY = 1 + m / 2;
    mpu_core u_mpu (
      .clk, .rst_n, .cmd_valid(cmd_valid[2+m]), .cmd, .busy(core_busy[2+m]),
      .in_valid(ov[MX][MY][L]), .in_ready(orr[MX][MY][L]), .in_flit(ofl[MX][MY][L]),
      .out_valid(iv[MX][MY][L]), .out_ready(ir[MX][MY][L]), .out_flit(ifl[MX][MY][L]),
      .stall(stall[m]));
  end
endmodule
