// pe_lane: one input-channel column of a PE (IBUF, IDXBUF, zero skipping
// unit, WBUF and four MAC arrays).
//
// The IBUF holds the non-zero 16-bit input sub-words of this lane's input
// channels, tile after tile, and the IDXBUF holds the 4-bit run-length index
// of each. Per cycle the lane reads one sub-word and its index, the zero
// skipping unit turns the index into the WBUF address of the matching input
// channel, and the WBUF word (four 4-bit weight slices, one per output
// channel) is applied to the four MAC arrays, which all receive the same
// sub-word. So every stored sub-word costs one cycle and feeds 16 MACs; a
// zero sub-word that was compressed away costs nothing. This follows the
// published PE datapath.
//
// A tile ends with the entry whose weight address reaches `cin_m1` (the
// encoder always stores the last channel of a tile). `start` runs one tile;
// `done` pulses when the 16 accumulators in `acc` hold its result and they
// stay valid until the next tile's first product. The read pointer carries
// on from tile to tile, so consecutive tiles are laid out back to back;
// `clear` rewinds it. Start to done takes stored entries + 3 cycles (one
// cycle to begin, a three-stage read / address / multiply pipeline).
//
// Own choices: the 64 B IDXBUF holds 128 indices, so with skipping on the
// lane uses IBUF entries 0..127; with skipping off (dense data, index
// ignored) it uses all 256. The IDXBUF is written with every IBUF write,
// whatever the skip setting, so buffers may be loaded before the lane is
// configured. Output order: acc[m*4+s] is output
// channel m, spatial position s.
module pe_lane
  import sba_pkg::*;
#(
  parameter int IBUF_DEPTH   = 256,
  parameter int IDXBUF_DEPTH = 128,
  parameter int WBUF_DEPTH   = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // buffer writes
  input  logic                  we_i,
  input  logic                  we_w,
  input  logic [7:0]            waddr,
  input  logic [SUBW_W-1:0]     wword,
  input  logic [IDX_W-1:0]      widx,
  // configuration
  input  logic                  skip_en,
  input  logic [WADDR_W-1:0]    cin_m1,
  input  logic                  clear,
  // control
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic signed [NOUT-1:0][ACC_W-1:0] acc
);
  localparam int IBA = $clog2(IBUF_DEPTH);
  localparam int IDA = $clog2(IDXBUF_DEPTH);

  logic [IBA-1:0]    rptr, rptr_nxt, ptr1;
  logic              running, issue;
  logic              v1, first1, v2, first2, last2;
  logic [SUBW_W-1:0] ib_q, sw2;
  logic [IDX_W-1:0]  idx_q;
  logic [SUBW_W-1:0] wb_q;
  logic [WADDR_W-1:0] zaddr;
  logic              zlast, s1_last;

  assign issue = running;

  function automatic logic [IBA-1:0] wrap(input logic [IBA-1:0] p, input logic sk);
    logic [IBA-1:0] r;
    r = p;
    if (sk) r[IBA-1:IDA] = '0;
    return r;
  endfunction

  assign rptr_nxt = wrap(rptr + 1'b1, skip_en);

  sram_1r1w #(.DEPTH(IBUF_DEPTH), .W(SUBW_W)) u_ibuf (
    .clk, .we(we_i), .waddr(waddr[IBA-1:0]), .wdata(wword),
    .re(issue), .raddr(rptr), .rdata(ib_q));
  sram_1r1w #(.DEPTH(IDXBUF_DEPTH), .W(IDX_W)) u_idxbuf (
    .clk, .we(we_i), .waddr(waddr[IDA-1:0]), .wdata(widx),
    .re(issue & skip_en), .raddr(rptr[IDA-1:0]), .rdata(idx_q));
  sram_1r1w #(.DEPTH(WBUF_DEPTH), .W(SUBW_W)) u_wbuf (
    .clk, .we(we_w), .waddr(waddr[WADDR_W-1:0]), .wdata(wword),
    .re(v1), .raddr(zaddr), .rdata(wb_q));

  zero_skip_unit #(.IDX_W(IDX_W), .WADDR_W(WADDR_W)) u_zsu (
    .clk, .rst_n, .start, .skip_en, .step(v1), .idx(idx_q),
    .last_addr(cin_m1), .next_addr(zaddr), .last(zlast));

  assign s1_last = v1 & zlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr <= '0; ptr1 <= '0; running <= 1'b0;
      v1 <= 1'b0; first1 <= 1'b0; v2 <= 1'b0; first2 <= 1'b0; last2 <= 1'b0;
      sw2 <= '0; done <= 1'b0;
    end else begin
      // stage 0: read IBUF / IDXBUF
      if (clear) rptr <= '0;
      else if (s1_last) rptr <= wrap(ptr1 + 1'b1, skip_en);
      else if (issue) rptr <= rptr_nxt;
      if (issue) ptr1 <= rptr;
      if (start) running <= 1'b1;
      else if (s1_last) running <= 1'b0;
      v1 <= issue & ~s1_last;
      if (start) first1 <= 1'b1;
      else if (v1) first1 <= 1'b0;
      // stage 1: index -> WBUF address
      v2     <= v1;
      first2 <= first1;
      last2  <= s1_last;
      sw2    <= ib_q;
      // stage 2: MAC, then done
      done   <= v2 & last2;
    end
  end

  assign busy = running | v1 | v2;

  for (genvar m = 0; m < 4; m++) begin : g_arr
    logic signed [3:0][ACC_W-1:0] a;
    mac_array #(.SLICE_W(SLICE_W), .NMAC(4), .ACC_W(ACC_W)) u_arr (
      .clk, .rst_n, .en(v2), .clr(first2), .subword(sw2),
      .w(wb_q[m*SLICE_W +: SLICE_W]), .acc(a));
    for (genvar s = 0; s < 4; s++) begin : g_o
      assign acc[m*4+s] = a[s];
    end
  end
endmodule
