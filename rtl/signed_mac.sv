// signed_mac: 4b x 4b signed multiply-accumulate with a 12-bit register.
//
// Both operands are signed bit-slices in two's complement, so no sign
// extension stage is needed in front of the multiplier: this is the point
// of the signed bit-slice representation (the 4x4 multiplier and the 12-bit
// accumulation register are the published sizes). When `en` is high the
// product is added to the register; `clr` together with `en` starts a new
// sum with the product alone. The register wraps on overflow, as a plain
// 12-bit register would; the published design does not say otherwise.
// Timing: one product per cycle, result visible one cycle after `en`.
module signed_mac #(
  parameter int SLICE_W = 4,
  parameter int ACC_W   = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      clr,
  input  logic signed [SLICE_W-1:0] a,
  input  logic signed [SLICE_W-1:0] w,
  output logic signed [ACC_W-1:0]   acc
);
  logic signed [2*SLICE_W-1:0] prod;
  logic signed [ACC_W-1:0]     prod_ext;

  always_comb begin
    prod     = a * w;
    prod_ext = ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (en)  acc <= clr ? prod_ext : acc + prod_ext;
  end
endmodule
