// uni_noc_router: the Uni-NoC router (UR) between two neighbouring
// accumulation units.
//
// The unidirectional network only ever carries a partial-sum vector from
// one accumulation unit to the next one downstream, so its router is a
// single registered hop with a valid/ready handshake: one packet buffer,
// accepted when empty or when the packet held is leaving in the same cycle.
// One cycle of latency, one packet per cycle. The published design names the
// router and its direction but not its insides; this is the simplest one
// that works.
module uni_noc_router
  import sba_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  psum_vec_t in_data,
  output logic      out_valid,
  input  logic      out_ready,
  output psum_vec_t out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data;
    end
  end

  // a packet offered downstream stays unchanged until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
