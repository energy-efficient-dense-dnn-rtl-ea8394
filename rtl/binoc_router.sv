// binoc_router: router of the bidirectional 2-D mesh network (Bi-NoC).
//
// Five ports: 0 local core, 1 north, 2 south, 3 east, 4 west; every link
// carries flits both ways. Each input has a two-flit FIFO; a flit is routed
// X first, then Y, to the router whose coordinate is in its header. The
// coordinate y = 3 names the control unit, reached through the north port of
// router (0,0). Each output has a round-robin arbiter over the inputs that
// want it, and moves at most one flit per cycle. Flits are single-beat, so
// no wormhole state is needed. Valid/ready handshakes; a FIFO accepts while
// it has room, so ready never depends combinationally on the far side.
// Published: a bidirectional 2-D mesh connecting the DMU and MPU cores and
// the control unit. Routing, buffering and arbitration are this design's
// own.
module binoc_router
  import sba_pkg::*;
#(
  parameter int X = 0,
  parameter int Y = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic  [4:0]      in_valid,
  output logic  [4:0]      in_ready,
  input  flit_t [4:0]      in_flit,
  output logic  [4:0]      out_valid,
  input  logic  [4:0]      out_ready,
  output flit_t [4:0]      out_flit
);
  localparam int L = 0, N = 1, S = 2, E = 3, W = 4;

  flit_t [4:0][1:0] q;
  logic  [4:0][1:0] qn;     // occupancy 0..2
  logic  [4:0]      head_v, pop;
  logic  [4:0][2:0] route;
  logic  [4:0][2:0] rr;
  logic  [4:0][4:0] grant;  // grant[out][in]
  logic  [4:0]      push;

  function automatic logic [2:0] xy(coord_t d);
    if (d.y == 2'd3) return (X != 0) ? 3'(W) : 3'(N);
    if (int'(d.x) > X) return 3'(E);
    if (int'(d.x) < X) return 3'(W);
    if (int'(d.y) < Y) return 3'(N);
    if (int'(d.y) > Y) return 3'(S);
    return 3'(L);
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head_v[i]   = (qn[i] != '0);
      route[i]    = xy(q[i][0].dst);
      in_ready[i] = (qn[i] != 2'd2);
      push[i]     = in_valid[i] && in_ready[i];
    end
    grant = '0;
    pop   = '0;
    for (int o = 0; o < 5; o++) begin
      logic found;
      found = 1'b0;
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!found && head_v[i] && route[i] == 3'(o)) begin
          found = 1'b1;
          grant[o][i] = 1'b1;
        end
      end
      out_valid[o] = found;
      out_flit[o]  = '0;
      for (int i = 0; i < 5; i++)
        if (grant[o][i]) out_flit[o] = q[i][0];
      for (int i = 0; i < 5; i++)
        if (grant[o][i] && out_ready[o]) pop[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qn <= '0; rr <= '0; q <= '0;
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (pop[i]) q[i][0] <= q[i][1];
        if (push[i]) begin
          if (qn[i] == 2'd0 || (qn[i] == 2'd1 && pop[i])) q[i][0] <= in_flit[i];
          else q[i][1] <= in_flit[i];
        end
        qn[i] <= qn[i] + 2'(push[i]) - 2'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        for (int i = 0; i < 5; i++)
          if (grant[o][i] && out_ready[o]) rr[o] <= 3'((i + 1) % 5);
    end
  end

  for (genvar i = 0; i < 5; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid[i] && !out_ready[i] |=> out_valid[i]);
  end
endmodule
