// sba_pkg: types and constants shared by the signed bit-slice accelerator.
//
// Sizes follow the published design where it prints them: 4-bit signed
// bit-slices, 16-bit sub-words of four slices, a 4-bit run-length index, a
// 5-bit weight-buffer address, 12-bit MAC accumulators, a 27-bit instruction
// made of a 7-bit address, a 4-bit opcode and a 16-bit operand. Everything
// else here (flit layout, opcode numbers, partial-sum width on the
// unidirectional network) is this implementation's own choice.
package sba_pkg;

  localparam int SLICE_W  = 4;              // signed bit-slice
  localparam int SUBW_N   = 4;              // slices per sub-word
  localparam int SUBW_W   = SLICE_W*SUBW_N; // 16b sub-word
  localparam int IDX_W    = 4;              // RLE index from IDXBUF
  localparam int WADDR_W  = 5;              // WBUF address (32 entries)
  localparam int ACC_W    = 12;             // signed MAC accumulator
  localparam int PSUM_W   = 16;             // partial sum on Uni-NoC
  localparam int NOUT     = 16;             // outputs per tile: 4 spatial x 4 channels
  localparam int DATA_W   = 13;             // widest fixed-point operand (4 slices)
  localparam int MAX_SLICES = 4;

  // Instruction: {address[6:0], opcode[3:0], operand[15:0]}
  localparam int INSTR_W = 27;
  typedef struct packed {
    logic [6:0]  addr;
    logic [3:0]  opcode;
    logic [15:0] operand;
  } instr_t;

  // Decoded command passed from the top decoder to a core decoder.
  typedef struct packed {
    logic [2:0]  sub;      // sub-unit inside a core (addr[2:0])
    logic [3:0]  opcode;
    logic [15:0] operand;
  } cmd_t;

  // Core addresses (addr[6:3]).
  localparam logic [3:0] CORE_DMU0 = 4'd0;
  localparam logic [3:0] CORE_DMU1 = 4'd1;
  localparam logic [3:0] CORE_MPU0 = 4'd2; // MPU n at CORE_MPU0+n
  localparam logic [6:0] ADDR_REPEAT = 7'h7F; // re-issue the last run

  // Common opcodes
  localparam logic [3:0] OP_NOP   = 4'h0;
  localparam logic [3:0] OP_CLEAR = 4'hE;
  localparam logic [3:0] OP_RUN   = 4'hF; // MPU: operand[2:0] = PE arrays to start (0 = all)
  // MPU core opcodes
  localparam logic [3:0] OP_M_CIN    = 4'h1; // operand[4:0] = input channels per lane - 1, [8] skip on
  localparam logic [3:0] OP_M_NTILE  = 4'h2; // operand[7:0] = tiles per run
  localparam logic [3:0] OP_M_COLCFG = 4'h3; // sub = array; operand: see pe_inst_decoder
  localparam logic [3:0] OP_M_ACT    = 4'h4; // sub = array; operand[1:0] act mode, [2] chain
  localparam logic [3:0] OP_M_BNSCL  = 4'h5; // sub = array; operand = scale (Q8.8 signed)
  localparam logic [3:0] OP_M_BNBIAS = 4'h6; // sub = array; operand = bias
  localparam logic [3:0] OP_M_OUTDST = 4'h7; // operand[2:0] = destination router {y[1:0],x}
  // DMU core opcodes
  localparam logic [3:0] OP_D_PREC   = 4'h1; // operand[2:0] = slices per value (1..4)
  localparam logic [3:0] OP_D_ENCB   = 4'h2; // sub = slice order; operand = memory base
  localparam logic [3:0] OP_D_TILEC  = 4'h3; // operand[4:0] = channels per tile - 1
  localparam logic [3:0] OP_D_CMP    = 4'h4; // operand[1:0]: 0 raw, 1 RLE, 2 DSM decides
  localparam logic [3:0] OP_D_MASK   = 4'h5; // sub = 16b chunk of the binary map
  localparam logic [3:0] OP_D_SRC    = 4'h6; // operand = memory address to send from
  localparam logic [3:0] OP_D_CNT    = 4'h7; // operand = words to send
  localparam logic [3:0] OP_D_DST    = 4'h8; // operand[2:0] router, [5:4] buffer
  localparam logic [3:0] OP_D_DMASK  = 4'h9; // operand[12:0] PE multicast mask
  localparam logic [3:0] OP_D_DADDR  = 4'hA; // operand[7:0] first buffer address
  localparam logic [3:0] OP_D_OBASE  = 4'hB; // operand = memory base for results
  localparam logic [3:0] OP_D_MASKEN = 4'hC; // operand[0] = apply binary map

  // Lane buffer select
  typedef enum logic [1:0] { BUF_IBUF = 2'd0, BUF_WBUF = 2'd1 } buf_e;

  // Activation modes
  typedef enum logic [1:0] { ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_LEAKY = 2'd2 } act_e;

  // PE multicast mask: arrays x columns x PEs x lanes (cross product).
  typedef struct packed {
    logic [2:0] arrays;
    logic [3:0] cols;
    logic [1:0] pes;
    logic [3:0] lanes;
  } pe_mask_t;

  // Bi-NoC flit kinds
  typedef enum logic [1:0] {
    FK_RAW = 2'd0, // 4 fixed-point values to be SBR-encoded at a DMU
    FK_BUF = 2'd1, // one buffer word for MPU lanes
    FK_OUT = 2'd2  // four finished outputs returned to a DMU
  } flit_kind_e;

  // Router coordinate: x in 0..1, y in 0..2; y == 3 is the control unit
  // port that leaves router (0,0) to the north.
  typedef struct packed {
    logic [1:0] y;
    logic       x;
  } coord_t;

  typedef struct packed {
    coord_t       dst;
    flit_kind_e   kind;
    logic [63:0]  data;
  } flit_t;

  // FK_BUF payload inside flit.data
  typedef struct packed {
    logic [16:0]  pad;
    buf_e         bsel;
    pe_mask_t     mask;
    logic [7:0]   addr;
    logic [IDX_W-1:0]  idx;
    logic [SUBW_W-1:0] word;
  } buf_payload_t;

  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef psum_t [NOUT-1:0] psum_vec_t;

  function automatic psum_t sat_psum(input logic signed [PSUM_W+1:0] v);
    if (v > $signed({3'b000, {(PSUM_W-1){1'b1}}}))       return {1'b0, {(PSUM_W-1){1'b1}}};
    else if (v < -$signed({3'b001, {(PSUM_W-1){1'b0}}})) return {1'b1, {(PSUM_W-1){1'b0}}};
    else return v[PSUM_W-1:0];
  endfunction

endpackage
