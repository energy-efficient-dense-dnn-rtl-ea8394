// dmu_inst_decoder: instruction decoder inside a DMU core.
//
// Turns the opcode and operand routed here by the top decoder into the DMU
// configuration: precision (slices per value), where each slice order is
// stored, channels per tile, compression mode, the output-speculation
// binary map (64 bits, loaded 16 at a time), and the parameters of a
// transfer to the MPU cores (source, length, destination core, buffer,
// multicast mask, buffer address) and of the result area. CLEAR and RUN
// become one-cycle pulses. Operand layouts are listed in sba_pkg.
// Published: the 4-bit opcode / 16-bit operand format. Register layout and
// opcode numbers are this design's own.
module dmu_inst_decoder
  import sba_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  cmd_t        cmd,
  output logic [2:0]  nslices,
  output logic [MAX_SLICES-1:0][15:0] enc_base,
  output logic [WADDR_W-1:0] tile_c_m1,
  output logic [1:0]  cmp_mode,
  output logic        cls,
  output logic [63:0] binmap,
  output logic        mask_en,
  output logic [15:0] src,
  output logic [15:0] cnt,
  output coord_t      dst,
  output buf_e        dst_buf,
  output pe_mask_t    dst_mask,
  output logic [7:0]  dst_addr,
  output logic [15:0] obase,
  output logic        clear,
  output logic        run
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nslices <= 3'd2; enc_base <= '0; tile_c_m1 <= '0; cmp_mode <= 2'd0; cls <= 1'b0;
      binmap <= '1; mask_en <= 1'b0; src <= '0; cnt <= '0; dst <= '0;
      dst_buf <= BUF_IBUF; dst_mask <= '0; dst_addr <= '0; obase <= '0;
      clear <= 1'b0; run <= 1'b0;
    end else begin
      clear <= 1'b0;
      run   <= 1'b0;
      if (cmd_valid) begin
        case (cmd.opcode)
          OP_D_PREC:   nslices <= cmd.operand[2:0];
          OP_D_ENCB:   enc_base[cmd.sub[1:0]] <= cmd.operand;
          OP_D_TILEC:  tile_c_m1 <= cmd.operand[4:0];
          OP_D_CMP:    begin cmp_mode <= cmd.operand[1:0]; cls <= cmd.operand[2]; end
          OP_D_MASK:   binmap[16*cmd.sub[1:0] +: 16] <= cmd.operand;
          OP_D_MASKEN: mask_en <= cmd.operand[0];
          OP_D_SRC:    src <= cmd.operand;
          OP_D_CNT:    cnt <= cmd.operand;
          OP_D_DST:    begin dst <= coord_t'(cmd.operand[2:0]); dst_buf <= buf_e'(cmd.operand[5:4]); end
          OP_D_DMASK:  dst_mask <= pe_mask_t'(cmd.operand[12:0]);
          OP_D_DADDR:  dst_addr <= cmd.operand[7:0];
          OP_D_OBASE:  obase <= cmd.operand;
          OP_CLEAR:    clear <= 1'b1;
          OP_RUN:      run <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
