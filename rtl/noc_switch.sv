// noc_switch: the MPU core's port to the Bi-NoC.
//
// Inbound, a buffer-write flit carries one sub-word (and its run-length
// index) for the IBUF or WBUF, a buffer address and a multicast mask that
// selects PE arrays, PE columns, PEs and lanes. The switch writes the word
// into every lane in the cross product of the four selections in one cycle,
// so the same flit can be unicast to one lane, multicast to a few (e.g. one
// input slice to two PEs) or broadcast to all 96. Writes are registered
// (one cycle). Other flit kinds are dropped.
//
// Outbound, it collects finished 16-output tiles from the three PE arrays
// (round-robin) and sends each as four flits of four 16-bit outputs to the
// DMU core at `out_dst`.
//
// Published: the switch and its unicast, multicast and broadcast. Own
// choices: the flit format and the mask encoding.
module noc_switch
  import sba_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit,
  output logic [2:0][31:0]  lane_we_i,
  output logic [2:0][31:0]  lane_we_w,
  output logic [7:0]        waddr,
  output logic [SUBW_W-1:0] wword,
  output logic [IDX_W-1:0]  widx,
  input  coord_t            out_dst,
  input  logic [2:0]        res_valid,
  output logic [2:0]        res_ready,
  input  psum_vec_t [2:0]   res_data,
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  output logic              out_busy
);
  buf_payload_t pl;
  assign pl       = buf_payload_t'(in_flit.data);
  assign in_ready = 1'b1;

  logic [2:0][31:0] we_i_n, we_w_n;
  always_comb begin
    for (int a = 0; a < 3; a++)
      for (int c = 0; c < 4; c++)
        for (int p = 0; p < 2; p++)
          for (int l = 0; l < 4; l++) begin
            logic hit;
            hit = in_valid && in_flit.kind == FK_BUF && pl.mask.arrays[a] &&
                  pl.mask.cols[c] && pl.mask.pes[p] && pl.mask.lanes[l];
            we_i_n[a][c*8+p*4+l] = hit && pl.bsel == BUF_IBUF;
            we_w_n[a][c*8+p*4+l] = hit && pl.bsel == BUF_WBUF;
          end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_we_i <= '0; lane_we_w <= '0; waddr <= '0; wword <= '0; widx <= '0;
    end else begin
      lane_we_i <= we_i_n;
      lane_we_w <= we_w_n;
      if (in_valid) begin
        waddr <= pl.addr;
        wword <= pl.word;
        widx  <= pl.idx;
      end
    end
  end

  // outbound serializer
  psum_vec_t  tile;
  logic [2:0] nleft;   // flits of the current tile still to send
  logic [1:0] k, rr;
  logic [1:0] pick;
  logic       take;

  always_comb begin
    pick = 2'd0;
    take = 1'b0;
    for (int i = 0; i < 3; i++) begin
      logic [1:0] j;
      j = 2'((int'(rr) + i) % 3);
      if (!take && res_valid[j]) begin
        pick = j;
        take = 1'b1;
      end
    end
    if (nleft != '0) take = 1'b0;
    res_ready = '0;
    if (take) res_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nleft <= '0; k <= '0; rr <= '0; tile <= '0;
      out_valid <= 1'b0; out_flit <= '0;
    end else begin
      if (take) begin
        tile  <= res_data[pick];
        nleft <= 3'd4;
        k     <= '0;
        rr    <= (pick == 2'd2) ? 2'd0 : pick + 1'b1;
        if (out_ready) out_valid <= 1'b0;
      end else if (nleft != '0 && (!out_valid || out_ready)) begin
        out_valid     <= 1'b1;
        out_flit.dst  <= out_dst;
        out_flit.kind <= FK_OUT;
        out_flit.data <= {tile[4*k+3], tile[4*k+2], tile[4*k+1], tile[4*k]};
        k     <= k + 1'b1;
        nleft <= nleft - 1'b1;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end

  assign out_busy = (nleft != '0) || out_valid;
endmodule
