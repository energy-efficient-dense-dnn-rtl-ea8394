// pe_inst_decoder: instruction decoder inside an MPU core (second level of
// the hierarchical decoder).
//
// Receives the 4-bit opcode and 16-bit operand that the top decoder routed
// here, plus the low 3 address bits that select a PE array where that
// matters. Configuration opcodes load registers (tile size and input
// channels, column roles, activation and batch-norm constants, the DMU the
// results go to); CLEAR rewinds the lane buffers; RUN starts the PE columns.
// The configuration stays in place, so the same tiling can be run again with
// RUN alone. RUN's operand bits 2:0 pick the PE arrays that start (0 means
// all three), so an unused array stays idle. Operand layouts are listed with the opcodes in sba_pkg.
// Published: the 4-bit opcode / 16-bit operand split and the configure-then-
// run scheme. Opcode numbers and register layout are this design's own.
module pe_inst_decoder
  import sba_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  cmd_t              cmd,
  output logic [WADDR_W-1:0] cin_m1,
  output logic              skip_en,
  output logic [7:0]        ntile,
  output logic [2:0][3:0]   shift_en,
  output logic [2:0][3:0]   bypass,
  output logic [2:0][3:0]   first,
  output logic [2:0]        transpose,
  output logic [2:0]        chain,
  output act_e [2:0]        act,
  output logic signed [2:0][15:0] bn_scale,
  output logic signed [2:0][15:0] bn_bias,
  output coord_t            out_dst,
  output logic              clear,
  output logic [2:0]        run
);
  logic [1:0] a;
  assign a = (cmd.sub > 3'd2) ? 2'd2 : cmd.sub[1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cin_m1 <= '0; skip_en <= 1'b0; ntile <= 8'd1;
      shift_en <= '0; bypass <= '1; first <= '1; transpose <= '0; chain <= '0;
      act <= {3{ACT_NONE}}; bn_scale <= {3{16'sd256}}; bn_bias <= '0;
      out_dst <= '0; clear <= 1'b0; run <= '0;
    end else begin
      clear <= 1'b0;
      run   <= '0;
      if (cmd_valid) begin
        case (cmd.opcode)
          OP_M_CIN:    begin cin_m1 <= cmd.operand[4:0]; skip_en <= cmd.operand[8]; end
          OP_M_NTILE:  ntile <= cmd.operand[7:0];
          OP_M_COLCFG: begin
            shift_en[a]  <= cmd.operand[3:0];
            bypass[a]    <= cmd.operand[7:4];
            first[a]     <= cmd.operand[11:8];
            transpose[a] <= cmd.operand[12];
          end
          OP_M_ACT:    begin act[a] <= act_e'(cmd.operand[1:0]); chain[a] <= cmd.operand[2]; end
          OP_M_BNSCL:  bn_scale[a] <= cmd.operand;
          OP_M_BNBIAS: bn_bias[a]  <= cmd.operand;
          OP_M_OUTDST: out_dst <= coord_t'(cmd.operand[2:0]);
          OP_CLEAR:    clear <= 1'b1;
          OP_RUN:      run   <= (cmd.operand[2:0] == 3'd0) ? 3'b111 : cmd.operand[2:0];
          default: ;
        endcase
      end
    end
  end
endmodule
