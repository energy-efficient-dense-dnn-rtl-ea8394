// accum_unit: accumulation unit of a PE column.
//
// Collects the results of the eight lanes of the column's two PEs (each lane
// is a different group of input channels), adds them in an adder tree and
// writes the 16 partial sums of the tile into the OBUF. Lanes finish a tile
// at different times because each skips a different number of zero
// sub-words, so every lane has a latch register here: a lane that finished
// early hands over its result and can start the next tile while the others
// are still busy. A lane whose latch is still occupied keeps its result in
// its own accumulators and waits (`lane_hold`); that is the stall the
// latches shorten.
//
// Second half: the Uni-NoC stage. A tile leaves the OBUF, is added to the
// partial-sum vector arriving from the upstream column (through a Uni-NoC
// router) and is passed downstream, shifted right arithmetically by 3 when
// the downstream column works on the next higher slice order (`shift_en`),
// unshifted when it works on the same order. `first` marks the column that
// starts a chain (no upstream input); `bypass` forwards upstream packets
// untouched (column not used). With `transpose` set (weight skipping, where
// weight sub-words sit in the IBUF and inputs in the WBUF) the 4x4 result is
// rearranged so the output keeps the layout of input skipping.
//
// Published: latch registers, adder tree, write control, OBUF #0/#1 of
// 0.75 KB, the adder, the >>3 and the mux, the rearrangement for weight
// skipping. Own choices: OBUF #0/#1 form one 48-tile ring (24 tiles of
// 16 x 16-bit partial sums each); partial sums are 16 bits and saturate;
// handshakes are valid/ready.
module accum_unit
  import sba_pkg::*;
#(
  parameter int NLANE      = 8,
  parameter int OBUF_DEPTH = 24      // tiles per OBUF bank
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               transpose,
  input  logic               shift_en,
  input  logic               bypass,
  input  logic               first,
  // lanes
  input  logic [NLANE-1:0]   lane_done,
  input  logic signed [NLANE-1:0][NOUT-1:0][ACC_W-1:0] lane_acc,
  output logic [NLANE-1:0]   lane_hold,
  // Uni-NoC
  input  logic               uni_in_valid,
  output logic               uni_in_ready,
  input  psum_vec_t          uni_in_data,
  output logic               uni_out_valid,
  input  logic               uni_out_ready,
  output psum_vec_t          uni_out_data,
  // status
  output logic               active
);
  localparam int PW = $clog2(2*OBUF_DEPTH);
  localparam int BA = $clog2(OBUF_DEPTH);

  logic [NLANE-1:0] pend, lat_v;
  logic signed [NLANE-1:0][NOUT-1:0][ACC_W-1:0] lat;
  logic [PW-1:0] wptr, rptr;
  logic [PW:0]   cnt;
  logic          full, wr, rd, rd_pend, rd_bank, hold_v;
  psum_vec_t     tree, hold;
  logic [1:0][NOUT*PSUM_W-1:0] bank_q;

  assign lane_hold = pend | lane_done;
  assign full      = (cnt == (PW+1)'(2*OBUF_DEPTH));
  assign wr        = (&lat_v) && !full;
  assign active    = (|pend) || (|lat_v);

  // adder tree over the lanes, then optional rearrangement (a transpose
  // of the 4x4 tile, its own inverse)
  psum_vec_t sums;
  always_comb begin
    for (int j = 0; j < NOUT; j++) begin
      logic signed [PSUM_W+1:0] s;
      s = '0;
      for (int i = 0; i < NLANE; i++) s += (PSUM_W+2)'($signed(lat[i][j]));
      sums[j] = sat_psum(s);
    end
    for (int j = 0; j < NOUT; j++)
      tree[j] = transpose ? sums[(j%4)*4 + j/4] : sums[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0; lat_v <= '0;
    end else begin
      for (int i = 0; i < NLANE; i++) begin
        if (lane_done[i]) pend[i] <= 1'b1;
        if (pend[i] && !lat_v[i]) begin
          lat_v[i] <= 1'b1;
          pend[i]  <= 1'b0;
        end
      end
      if (wr) lat_v <= '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NLANE; i++)
      if (pend[i] && !lat_v[i]) lat[i] <= lane_acc[i];
  end

  // OBUF #0 and #1 with write control
  for (genvar b = 0; b < 2; b++) begin : g_obuf
    sram_1r1w #(.DEPTH(OBUF_DEPTH), .W(NOUT*PSUM_W)) u_obuf (
      .clk,
      .we(wr && (wptr >= PW'(OBUF_DEPTH)) == b[0]),
      .waddr(BA'(wptr >= PW'(OBUF_DEPTH) ? wptr - PW'(OBUF_DEPTH) : wptr)),
      .wdata(tree),
      .re(rd && (rptr >= PW'(OBUF_DEPTH)) == b[0]),
      .raddr(BA'(rptr >= PW'(OBUF_DEPTH) ? rptr - PW'(OBUF_DEPTH) : rptr)),
      .rdata(bank_q[b]));
  end

  // Uni-NoC router on the upstream link
  logic      up_valid, up_ready;
  psum_vec_t up_data;
  uni_noc_router u_ur (
    .clk, .rst_n,
    .in_valid(uni_in_valid), .in_ready(uni_in_ready), .in_data(uni_in_data),
    .out_valid(up_valid), .out_ready(up_ready), .out_data(up_data));

  logic out_free, fire, pass;
  assign out_free = !uni_out_valid || uni_out_ready;
  assign rd       = (cnt != '0) && !hold_v && !rd_pend && !bypass;
  assign pass     = bypass && up_valid && out_free;
  assign fire     = !bypass && hold_v && (first || up_valid) && out_free;
  assign up_ready = pass || (fire && !first);

  function automatic psum_vec_t combine(psum_vec_t a, psum_vec_t b, logic use_b, logic sh);
    psum_vec_t r;
    for (int j = 0; j < NOUT; j++) begin
      logic signed [PSUM_W+1:0] s;
      s = (PSUM_W+2)'(a[j]) + (use_b ? (PSUM_W+2)'(b[j]) : '0);
      r[j] = sh ? psum_t'(s >>> 3) : sat_psum(s);
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; cnt <= '0;
      rd_pend <= 1'b0; rd_bank <= 1'b0; hold_v <= 1'b0; hold <= '0;
      uni_out_valid <= 1'b0; uni_out_data <= '0;
    end else begin
      if (wr) wptr <= (wptr == PW'(2*OBUF_DEPTH-1)) ? '0 : wptr + 1'b1;
      if (rd) rptr <= (rptr == PW'(2*OBUF_DEPTH-1)) ? '0 : rptr + 1'b1;
      cnt <= cnt + (PW+1)'(wr) - (PW+1)'(rd);
      rd_pend <= rd;
      if (rd) rd_bank <= (rptr >= PW'(OBUF_DEPTH));
      if (rd_pend) begin
        hold   <= bank_q[rd_bank];
        hold_v <= 1'b1;
      end else if (fire) hold_v <= 1'b0;
      if (pass) begin
        uni_out_valid <= 1'b1;
        uni_out_data  <= up_data;
      end else if (fire) begin
        uni_out_valid <= 1'b1;
        uni_out_data  <= combine(hold, up_data, !first, shift_en);
      end else if (uni_out_ready) uni_out_valid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (lane_done & lat_v & pend) == '0);
endmodule
