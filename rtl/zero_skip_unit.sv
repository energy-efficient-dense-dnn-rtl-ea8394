// zero_skip_unit: turns run-length indices into weight-buffer addresses.
//
// Only non-zero input sub-words are stored; each carries a 4-bit index that
// counts the zero sub-words skipped in front of it. The unit keeps the
// address of the previous weight and forms the next one as
// previous + 1 + index, so the MAC array reads the weight slice of the same
// input channel as the sub-word it is fed (5-bit address into the 32-entry
// WBUF, as published). With `skip_en` low (dense data, skipping switched
// off) the index is ignored and the address simply counts up.
// `start` makes the next address 0 + index (a new tile). `next_addr` is
// combinational from `idx`; the stored address advances on `step`. `last`
// flags the entry whose address equals `last_addr` (end of the tile).
module zero_skip_unit #(
  parameter int IDX_W   = 4,
  parameter int WADDR_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               skip_en,
  input  logic               step,
  input  logic [IDX_W-1:0]   idx,
  input  logic [WADDR_W-1:0] last_addr,
  output logic [WADDR_W-1:0] next_addr,
  output logic               last
);
  logic [WADDR_W-1:0] prev;
  logic               fresh;

  always_comb begin
    logic [WADDR_W-1:0] inc;
    inc       = skip_en ? WADDR_W'(idx) : '0;
    next_addr = (fresh ? '0 : prev + 1'b1) + inc;
    last      = (next_addr >= last_addr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev  <= '0;
      fresh <= 1'b1;
    end else if (start) begin
      fresh <= 1'b1;
    end else if (step) begin
      prev  <= next_addr;
      fresh <= 1'b0;
    end
  end
endmodule
