// dmu_core: data management unit core.
//
// Holds the 64 KB shared global memory (four banks of 4096 x 32-bit words)
// and prepares data for the MPU cores.
//  - Encoding: raw-data flits bring four spatially adjacent fixed-point
//    values (inputs or weights). The SBR unit cuts them into signed
//    bit-slices, one 16-bit sub-word per slice order; one RLE unit per order
//    compresses zero sub-words (or not, per the compression mode) and the
//    surviving {index, sub-word} entries are appended to bank o, starting at
//    the order's base. The dynamic sparsity monitor counts zeros on the way
//    and, in automatic mode, decides per order whether to compress. The
//    entry counts per order (`enc_cnt`) and the monitor's decisions are
//    outputs for the control processor.
//  - Sending: RUN streams `cnt` words from `src` (bank in bits 13:12) as
//    buffer-write flits to an MPU core, with a buffer address that counts up
//    from `dst_addr` and the configured multicast mask. Sent to the control
//    unit (y = 3) instead, each flit carries the whole 32-bit memory word:
//    this is how results are read back.
//  - Results: output flits from the MPU cores (four 16-bit values each) are
//    stored as two words each from `obase` on.
// Values arrive in the order channel-fastest within a tile of `tile_c_m1`+1
// channels; bit t of the binary map (when enabled) masks tile t.
// Published: the SBR, RLE and DSM units and the 64 KB memory in a DMU core,
// and that the DMU feeds the MPUs and stores their outputs. The banking by
// slice order, the flit formats and the sequencing are this design's own.
module dmu_core
  import sba_pkg::*;
#(
  parameter int BANK_DEPTH = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_valid,
  input  cmd_t  cmd,
  output logic  busy,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit,
  output logic [MAX_SLICES-1:0][11:0] enc_cnt,
  output logic [1:0][MAX_SLICES-1:0] dsm_cmp,
  output logic [MAX_SLICES-1:0][MAX_SLICES-1:0] dsm_wskip,
  output logic [MAX_SLICES-1:0][MAX_SLICES-1:0] dsm_dense
);
  localparam int BA = $clog2(BANK_DEPTH);

  logic [2:0]  nslices;
  logic [MAX_SLICES-1:0][15:0] enc_base;
  logic [WADDR_W-1:0] tile_c_m1;
  logic [1:0]  cmp_mode;
  logic        cls, mask_en, clear, run;
  logic [63:0] binmap;
  logic [15:0] src, cnt, obase;
  coord_t      dst;
  buf_e        dst_buf;
  pe_mask_t    dst_mask;
  logic [7:0]  dst_addr;

  dmu_inst_decoder u_dec (
    .clk, .rst_n, .cmd_valid, .cmd, .nslices, .enc_base, .tile_c_m1, .cmp_mode,
    .cls, .binmap, .mask_en, .src, .cnt, .dst, .dst_buf, .dst_mask, .dst_addr,
    .obase, .clear, .run);

  // ---------------- encoder path ----------------
  logic raw_in, out_in, out_second;
  logic [WADDR_W-1:0] chan;
  logic [5:0]  tile;
  logic        last_s1, mask_s1;
  logic        sbr_v;
  logic [MAX_SLICES-1:0][SUBW_W-1:0] sw;
  logic [MAX_SLICES-1:0] rle_v, zero;
  logic [MAX_SLICES-1:0][SUBW_W-1:0] rle_w;
  logic [MAX_SLICES-1:0][IDX_W-1:0]  rle_i;
  logic [MAX_SLICES-1:0] ov, cmp_en;
  logic        pipe_busy;

  assign pipe_busy = sbr_v || (|rle_v);
  assign raw_in = in_valid && in_flit.kind == FK_RAW;
  assign out_in = in_valid && in_flit.kind == FK_OUT && in_ready;
  assign in_ready = !(in_flit.kind == FK_OUT && (pipe_busy || out_second));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chan <= '0; tile <= '0; last_s1 <= 1'b0; mask_s1 <= 1'b1;
    end else if (clear) begin
      chan <= '0; tile <= '0;
    end else if (raw_in) begin
      last_s1 <= (chan == tile_c_m1);
      mask_s1 <= !mask_en || binmap[tile];
      if (chan == tile_c_m1) begin
        chan <= '0;
        tile <= tile + 1'b1;
      end else chan <= chan + 1'b1;
    end
  end

  sbr_unit u_sbr (
    .clk, .rst_n, .nslices, .in_valid(raw_in),
    .in_data({in_flit.data[51:39], in_flit.data[38:26], in_flit.data[25:13], in_flit.data[12:0]}),
    .out_valid(sbr_v), .subword(sw));

  for (genvar o = 0; o < MAX_SLICES; o++) begin : g_rle
    assign ov[o] = (3'(o) < nslices);
    assign cmp_en[o] = (cmp_mode == 2'd1) || (cmp_mode == 2'd2 && dsm_cmp[cls][o]);
    rle_unit u_rle (
      .clk, .rst_n, .clear, .cmp_en(cmp_en[o]),
      .in_valid(sbr_v && ov[o]), .in_word(sw[o]), .mask(mask_s1), .last(last_s1),
      .out_valid(rle_v[o]), .out_word(rle_w[o]), .out_idx(rle_i[o]), .in_zero(zero[o]));
  end

  dsm_unit u_dsm (
    .clk, .rst_n, .clear, .cls, .in_valid(sbr_v), .order_valid(ov), .zero,
    .cmp_en(dsm_cmp), .wskip(dsm_wskip), .dense(dsm_dense));

  // ---------------- global memory ----------------
  logic [MAX_SLICES-1:0]          bwe;
  logic [MAX_SLICES-1:0][BA-1:0]  bwaddr;
  logic [MAX_SLICES-1:0][31:0]    bwdata, brdata;
  logic                           sre;
  logic [BA-1:0]                  sraddr;
  logic [15:0]                    optr;
  logic [31:0]                    out_hi;
  logic [15:0]                    oaddr;

  always_comb begin
    for (int o = 0; o < MAX_SLICES; o++) begin
      bwe[o]    = rle_v[o];
      bwaddr[o] = BA'(enc_base[o] + 16'(enc_cnt[o]));
      bwdata[o] = {12'd0, rle_i[o], rle_w[o]};
    end
    oaddr = obase + optr;
    if (out_in || out_second) begin
      bwe[oaddr[13:12]]    = 1'b1;
      bwaddr[oaddr[13:12]] = BA'(oaddr[11:0]);
      bwdata[oaddr[13:12]] = out_in ? in_flit.data[31:0] : out_hi;
    end
  end

  for (genvar b = 0; b < MAX_SLICES; b++) begin : g_bank
    sram_1r1w #(.DEPTH(BANK_DEPTH), .W(32)) u_bank (
      .clk, .we(bwe[b]), .waddr(bwaddr[b]), .wdata(bwdata[b]),
      .re(sre), .raddr(sraddr), .rdata(brdata[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_cnt <= '0; optr <= '0; out_second <= 1'b0; out_hi <= '0;
    end else if (clear) begin
      enc_cnt <= '0; optr <= '0; out_second <= 1'b0;
    end else begin
      for (int o = 0; o < MAX_SLICES; o++)
        if (rle_v[o]) enc_cnt[o] <= enc_cnt[o] + 1'b1;
      if (out_in) begin
        out_second <= 1'b1;
        out_hi     <= in_flit.data[63:32];
        optr       <= optr + 1'b1;
      end else if (out_second) begin
        out_second <= 1'b0;
        optr       <= optr + 1'b1;
      end
    end
  end

  // ---------------- send engine ----------------
  logic [15:0] sleft, soff;
  logic [7:0]  sbufaddr;
  logic        rd_pend;
  logic [1:0]  sbank;

  assign sre    = (sleft != '0) && !rd_pend && (!out_valid || out_ready);
  assign sraddr = BA'(src[11:0] + soff);
  assign sbank  = src[13:12];

  buf_payload_t spl;
  always_comb begin
    spl.pad  = '0;
    spl.bsel = dst_buf;
    spl.mask = dst_mask;
    spl.addr = sbufaddr;
    spl.idx  = brdata[sbank][19:16];
    spl.word = brdata[sbank][15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sleft <= '0; soff <= '0; sbufaddr <= '0; rd_pend <= 1'b0;
      out_valid <= 1'b0; out_flit <= '0;
    end else begin
      if (run) begin
        sleft <= cnt; soff <= '0; sbufaddr <= dst_addr;
      end else if (sre) begin
        sleft <= sleft - 1'b1;
        soff  <= soff + 1'b1;
      end
      rd_pend <= sre;
      if (rd_pend) begin
        out_valid     <= 1'b1;
        out_flit.dst  <= dst;
        out_flit.kind <= FK_BUF;
        out_flit.data <= (dst.y == 2'd3) ? {32'd0, brdata[sbank]} : 64'(spl);
        sbufaddr      <= sbufaddr + 1'b1;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end

  assign busy = run || (sleft != '0) || rd_pend || out_valid || pipe_busy || out_second;
endmodule
