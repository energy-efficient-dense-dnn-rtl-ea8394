// mac_array: four signed MAC units sharing one weight bit-slice.
//
// The 16-bit input sub-word holds four spatially adjacent 4-bit signed
// bit-slices; slice s goes to MAC s, and all four multiply by the same
// weight slice, so the array produces four spatially adjacent partial sums
// of one output channel (as published). Timing is that of signed_mac.
module mac_array #(
  parameter int SLICE_W = 4,
  parameter int NMAC    = 4,
  parameter int ACC_W   = 12
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic                           clr,
  input  logic [NMAC*SLICE_W-1:0]        subword,
  input  logic signed [SLICE_W-1:0]      w,
  output logic signed [NMAC-1:0][ACC_W-1:0] acc
);
  for (genvar s = 0; s < NMAC; s++) begin : g_mac
    signed_mac #(.SLICE_W(SLICE_W), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .en, .clr,
      .a   (subword[s*SLICE_W +: SLICE_W]),
      .w   (w),
      .acc (acc[s])
    );
  end
endmodule
