// act_bn_unit: activation-function and batch-normalisation unit at the end
// of a PE array's Uni-NoC chain.
//
// Takes the finished 16-element partial-sum vector of a tile from the last
// PE column. In `chain` mode the vector is forwarded raw to the next PE
// array (which then continues the accumulation, e.g. for further slice
// orders). Otherwise each element is normalised, y = ((x * scale) >>> 8) +
// bias with a signed Q8.8 scale, saturated to 16 bits, and passed through
// the activation: none, ReLU, or leaky ReLU with slope 1/8. Results leave on
// `res_*`. One registered stage, valid/ready on every port.
//
// The published design only names this unit. The Q8.8 format, the 1/8 leak
// slope and the set of functions are this design's assumptions.
module act_bn_unit
  import sba_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             chain,
  input  act_e             act,
  input  logic signed [15:0] scale,
  input  logic signed [15:0] bias,
  input  logic             in_valid,
  output logic             in_ready,
  input  psum_vec_t        in_data,
  output logic             chain_valid,
  input  logic             chain_ready,
  output psum_vec_t        chain_data,
  output logic             res_valid,
  input  logic             res_ready,
  output psum_vec_t        res_data
);
  function automatic psum_t f(psum_t x, logic signed [15:0] sc, logic signed [15:0] bi, act_e a);
    logic signed [31:0] p;
    logic signed [PSUM_W+1:0] y;
    psum_t z;
    p = 32'(x) * 32'(sc);
    y = (PSUM_W+2)'(p >>> 8) + (PSUM_W+2)'(bi);
    if (p >>> 8 > 32'sd65535)       y = 18'sd65535;
    else if (p >>> 8 < -32'sd65536) y = -18'sd65536;
    z = sat_psum(y);
    case (a)
      ACT_RELU:  return z[PSUM_W-1] ? '0 : z;
      ACT_LEAKY: return z[PSUM_W-1] ? (z >>> 3) : z;
      default:   return z;
    endcase
  endfunction

  logic busy_c, busy_r;
  assign busy_c   = chain_valid && !chain_ready;
  assign busy_r   = res_valid && !res_ready;
  assign in_ready = !busy_c && !busy_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain_valid <= 1'b0; res_valid <= 1'b0;
      chain_data <= '0; res_data <= '0;
    end else if (in_ready) begin
      chain_valid <= in_valid && chain;
      res_valid   <= in_valid && !chain;
      if (in_valid && chain) chain_data <= in_data;
      if (in_valid && !chain)
        for (int j = 0; j < NOUT; j++) res_data[j] <= f(in_data[j], scale, bias, act);
    end
  end
endmodule
