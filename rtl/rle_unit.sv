// rle_unit: coarse run-length encoder for one slice order.
//
// Works on whole 16-bit sub-words (four 4-bit slices), not single slices,
// so the index stays small next to the data. A sub-word that is all zero is
// dropped and counted; the next stored sub-word carries the count of zeros
// before it as its 4-bit index. A sub-word is stored anyway when the run has
// reached 15 (the largest index) and when it is the last of a tile (`last`),
// so every tile ends on a stored entry; the PE lanes rely on that to find
// the end of a tile. With `cmp_en` low nothing is dropped and every index is
// 0 (hybrid compression leaves dense orders raw). `mask` low forces the
// sub-word to zero before encoding: this is how a binary map of outputs
// predicted non-maximal by output speculation turns into skipped inputs.
// Output is registered: `out_valid` one cycle after `in_valid`.
// Published: coarse RLE over all-zero sub-words, sub-word plus index, the
// binary map. Own choices: the forced store at 15 and at the end of a tile.
module rle_unit
  import sba_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              cmp_en,
  input  logic              in_valid,
  input  logic [SUBW_W-1:0] in_word,
  input  logic              mask,
  input  logic              last,
  output logic              out_valid,
  output logic [SUBW_W-1:0] out_word,
  output logic [IDX_W-1:0]  out_idx,
  output logic              in_zero      // the masked sub-word was zero
);
  logic [IDX_W-1:0]  run;
  logic [SUBW_W-1:0] w;
  logic              keep;

  always_comb begin
    w       = mask ? in_word : '0;
    in_zero = (w == '0);
    keep    = !cmp_en || !in_zero || (run == '1) || last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= '0; out_valid <= 1'b0; out_word <= '0; out_idx <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) run <= '0;
      else if (in_valid) begin
        if (keep) begin
          out_valid <= 1'b1;
          out_word  <= w;
          out_idx   <= cmp_en ? run : '0;
          run       <= '0;
        end else begin
          run <= run + 1'b1;
        end
      end
    end
  end
endmodule
