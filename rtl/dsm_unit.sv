// dsm_unit: dynamic sparsity monitor.
//
// Counts, per slice order, how many sub-words pass and how many are zero,
// separately for input data (`cls` = 0) and weight data (`cls` = 1), while
// they are being encoded. From the counts it derives, continuously:
//  - cmp_en[c][o]: compress order o of class c, set when more than 20 % of
//    its sub-words are zero. A stored sub-word costs 16 + 4 index bits, a
//    raw one 16, so below that the index costs more than the zeros save.
//  - wskip[i][w]: for the product of input order i and weight order w, skip
//    on weights rather than inputs (weights are sparser).
//  - dense[i][w]: neither side passes the 20 % mark; switch zero skipping
//    and the IDXBUF off for that product.
// `clear` restarts the counts. Ratios are compared by cross-multiplying the
// counts, so no divider is needed.
// Published: the monitor, its two decisions (which operand to skip on,
// whether to compress) and when it decides. Own choices: the 20 % rule and
// the counter widths.
module dsm_unit
  import sba_pkg::*;
#(
  parameter int CNT_W = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        cls,
  input  logic        in_valid,
  input  logic [MAX_SLICES-1:0] order_valid,
  input  logic [MAX_SLICES-1:0] zero,
  output logic [1:0][MAX_SLICES-1:0] cmp_en,
  output logic [MAX_SLICES-1:0][MAX_SLICES-1:0] wskip,
  output logic [MAX_SLICES-1:0][MAX_SLICES-1:0] dense
);
  logic [1:0][MAX_SLICES-1:0][CNT_W-1:0] tot, zer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tot <= '0; zer <= '0;
    end else if (clear) begin
      tot <= '0; zer <= '0;
    end else if (in_valid) begin
      for (int o = 0; o < MAX_SLICES; o++)
        if (order_valid[o] && tot[cls][o] != '1) begin
          tot[cls][o] <= tot[cls][o] + 1'b1;
          if (zero[o]) zer[cls][o] <= zer[cls][o] + 1'b1;
        end
    end
  end

  always_comb begin
    for (int c = 0; c < 2; c++)
      for (int o = 0; o < MAX_SLICES; o++)
        cmp_en[c][o] = (5 * (CNT_W+3)'(zer[c][o])) > (CNT_W+3)'(tot[c][o]);
    for (int i = 0; i < MAX_SLICES; i++)
      for (int w = 0; w < MAX_SLICES; w++) begin
        // zw/tw > zi/ti  <=>  zw*ti > zi*tw
        wskip[i][w] = (2*CNT_W)'(zer[1][w]) * (2*CNT_W)'(tot[0][i]) >
                      (2*CNT_W)'(zer[0][i]) * (2*CNT_W)'(tot[1][w]);
        dense[i][w] = !cmp_en[0][i] && !cmp_en[1][w];
      end
  end
endmodule
