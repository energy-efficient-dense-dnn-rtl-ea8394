// sbr_unit: signed bit-slice representation (SBR) encoder.
//
// A two's-complement value of 3n+1 bits (n = 1..4 slices: 4, 7, 10 or 13
// bits) is cut into a signed top slice of 4 bits and n-1 lower slices of
// 3 bits. In plain bit-slicing the lower slices are unsigned; SBR gives each
// a sign bit and, for a negative value, lends 1 from every slice to the one
// above it: the top slice gets +1 (0001), a middle slice gets +1-8 (1001),
// the lowest gets -8 (1000); a positive value gets 0000 everywhere. The sum
// of slice_i * 8^i is unchanged, but small negative numbers now give 0000
// top slices instead of 1111, and positive and negative values of equal
// magnitude give slices of equal magnitude. Example: 1111101 (-3) becomes
// 0000 and 1101.
//
// Four spatially adjacent values come in together; slice order o of the
// four goes into sub-word o (value s in bits 4s+3..4s). Orders at or above
// n are zero. One registered stage; one group of four values per cycle.
// The add-value mux, the per-order adder and the 4 x 4b sub-word register
// are as published.
module sbr_unit
  import sba_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [2:0]  nslices,            // 1..4
  input  logic        in_valid,
  input  logic [3:0][DATA_W-1:0] in_data, // sign-extended to 13 bits
  output logic        out_valid,
  output logic [MAX_SLICES-1:0][SUBW_W-1:0] subword
);
  function automatic logic [3:0] slice_of(logic [DATA_W-1:0] x, int o, int n);
    logic [3:0] raw, add;
    logic       neg;
    neg = x[DATA_W-1];
    if (o >= n) return 4'b0000;
    if (o == n-1) raw = x[3*o +: 4];            // signed top slice
    else          raw = {1'b0, x[3*o +: 3]};    // lower slice
    if (!neg || n == 1)   add = 4'b0000;
    else if (o == n-1)    add = 4'b0001;        // borrows 1
    else if (o == 0)      add = 4'b1000;        // lends 1000
    else                  add = 4'b1001;        // borrows 1 and lends 1000
    return raw + add;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      subword   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int o = 0; o < MAX_SLICES; o++)
          for (int s = 0; s < 4; s++)
            subword[o][4*s +: 4] <= slice_of(in_data[s], o, int'(nslices));
    end
  end
endmodule
