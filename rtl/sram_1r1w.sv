// sram_1r1w: on-chip buffer with one synchronous write and one synchronous
// read port, written as a register array.
//
// All buffers of the accelerator use it: IBUF (256 x 16b = 0.5 KB), WBUF
// (32 x 16b = 64 B), IDXBUF (128 x 4b = 64 B), OBUF (2 x 24 x 256b = 2 x
// 0.75 KB) and the 64 KB global memory of a DMU core (4 banks of
// 4096 x 32b). The capacities are the published ones; the word widths and
// port count are this design's choice. Read data appears one cycle after
// `re`; a read of the address being written returns the old word.
module sram_1r1w #(
  parameter int DEPTH = 256,
  parameter int W     = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
