// top_inst_decoder: first level of the hierarchical instruction decoder.
//
// Takes 27-bit instructions {address[6:0], opcode[3:0], operand[15:0]} from
// the control processor. The top bits of the address pick the core
// (0, 1: DMU cores; 2..5: MPU cores 0..3), the low three bits are passed on
// with the opcode and operand to that core's own decoder as a one-cycle
// command. An instruction for a core that is busy waits (instr_ready low),
// so the processor can stream a whole layer's program without polling.
// Every RUN is remembered; the instruction with address 7'h7F re-issues the
// last RUN to the same core, which is how the next tile with an unchanged
// configuration is started without sending the set-up again. `fetched`
// counts instructions taken, `reissued` the runs started by re-issue.
// Published: the 27-bit format, the 7-bit address read at the top and the
// re-run of the run instruction. The address map, the busy wait and the
// re-issue opcode are this design's own.
module top_inst_decoder
  import sba_pkg::*;
#(
  parameter int NCORE = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  output logic             instr_ready,
  input  instr_t           instr,
  input  logic [NCORE-1:0] core_busy,
  output logic [NCORE-1:0] cmd_valid,
  output cmd_t             cmd,
  output logic [15:0]      fetched,
  output logic [15:0]      reissued
);
  logic [3:0]             tgt, last_tgt;
  logic                   rep, have_run, tgt_ok, tgt_busy;
  cmd_t                   c, last_run;
  logic [NCORE-1:0][1:0]  holdoff;

  always_comb begin
    rep      = (instr.addr == ADDR_REPEAT);
    tgt      = rep ? last_tgt : instr.addr[6:3];
    c        = rep ? last_run : '{sub: instr.addr[2:0], opcode: instr.opcode, operand: instr.operand};
    tgt_ok   = (int'(tgt) < NCORE) && (!rep || have_run);
    tgt_busy = 1'b0;
    for (int k = 0; k < NCORE; k++)
      if (tgt_ok && int'(tgt) == k && (core_busy[k] || holdoff[k] != '0)) tgt_busy = 1'b1;
    instr_ready = !tgt_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= '0; cmd <= '0; last_run <= '0; last_tgt <= '0; have_run <= 1'b0;
      holdoff <= '0; fetched <= '0; reissued <= '0;
    end else begin
      cmd_valid <= '0;
      for (int k = 0; k < NCORE; k++)
        if (holdoff[k] != '0) holdoff[k] <= holdoff[k] - 1'b1;
      if (instr_valid && instr_ready) begin
        fetched <= fetched + 1'b1;
        if (tgt_ok) begin
          cmd_valid[3'(tgt)] <= 1'b1;
          cmd            <= c;
          holdoff[3'(tgt)]   <= 2'd3;
          if (!rep && instr.opcode == OP_RUN) begin
            last_run <= c;
            last_tgt <= tgt;
            have_run <= 1'b1;
          end
          if (rep) reissued <= reissued + 1'b1;
        end
      end
    end
  end
endmodule
