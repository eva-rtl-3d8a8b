// eva_top: the EVA accelerator core for vector-quantised LLM decoding.
//
// Idea. With vector quantisation every group of d = 8 consecutive weights of
// a column of W is replaced by an 8-bit index into a codebook B of 256
// centroids. Instead of rebuilding W, EVA multiplies the reshaped input
// X (K/8 x 8) by the codebook, O = X B, a small GEMM (the "output codebook",
// OC), and then forms every output y[n] by looking up and adding, for each
// row v, the entry O[v][I[v][n]] selected by the weight index I[v][n]. The
// GEMM keeps a 32x8 FP16 systolic array busy where a GEMV would use a
// single lane, and because row v of O lives in its own memory bank and each
// index of a WI column belongs to a different row, the lookups never
// collide. With C additive codebooks the same is done per codebook and the
// results are summed.
//
// Blocks and data flow:
//   input_buffer --(tile preload)--> gemm_unit <--(centroids)-- wc_buffer
//   gemm_unit --(row r of each OC tile)--> oc_buffer bank r
//   wi_buffer --(WI column: 32 indices per EU)--> 4 x epilogue_unit
//   epilogue_unit <--(32 conflict-free lookups)-- oc_buffer
//   epilogue sums --(per-request reduction)--> output_buffer
//   controller sequences all of it; GEMM work on the next tiles overlaps
//   the epilogue of the current ones.
// The vector processing unit and DRAM are outside this core: buffers are
// filled through ports, WI arrives as a valid/ready stream, results are read
// from the output buffer.
//
// Prefill (INT8): while the controller is idle and pf_mode is high, the
// GEMM unit runs as a 32x32 INT8 weight-stationary array driven directly
// from the pf_* ports (load a weight tile with pf_load/pf_stat, stream
// activations with pf_valid/pf_strm; pf_out_valid[r]/pf_out_int[r] return
// row r's INT32 result r + 9 cycles later). The data path
// around the array in prefill is not part of this core.
//
// Using a layer: fill the input buffer (row b*V + v holds x[8v .. 8v+7] of
// request b, V = K/8), the codebook buffer (address c*256 + j holds centroid
// j of codebook c), pulse start with cfg_*; stream WI words while busy,
// wi_data[(l*32 + r)*8 +: 8] = index of row r of the tile of lane l for the
// current column (order: group, codebook, column); wait for done; read y
// through out_addr/out_lane (one-cycle latency).
// Sizes follow the design's main configuration (32x32/32x8 array, 4 EUs,
// 16 KB WC, 32 KB input, 256 KB WI, 192 KB OC buffers).
// Lint note: verilator reports SYNCASYNCNET on rst_n because the
// assertions use it in 'disable iff' while the flops use it as the
// asynchronous reset; assertions are not synthesised, so it stands.
module eva_top
  import eva_pkg::*;
#(
  parameter int unsigned NUM_EU   = 4,
  parameter int unsigned N_MAX    = 4096,
  parameter int unsigned SLOTS    = 3,
  parameter int unsigned WI_DEPTH = 2048,
  localparam int unsigned ROWS    = 32,
  localparam int unsigned COLS    = 8,
  localparam int unsigned ENTRIES = 256,
  localparam int unsigned IDX_W   = 8,
  localparam int unsigned MAX_CB  = 4,
  localparam int unsigned IN_DEPTH = 2048,
  localparam int unsigned EW      = (NUM_EU > 1) ? $clog2(NUM_EU) : 1,
  localparam int unsigned SW      = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned IW      = $clog2(ENTRIES),
  localparam int unsigned NW      = $clog2(N_MAX) + 1,
  localparam int unsigned XAW     = $clog2(IN_DEPTH),
  localparam int unsigned CAW     = $clog2(MAX_CB * ENTRIES),
  localparam int unsigned WIW     = NUM_EU * ROWS * IDX_W,
  localparam int unsigned GTAG_W  = EW + SW + IW
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer fill
  input  logic              x_we,
  input  logic [XAW-1:0]    x_waddr,
  input  logic [127:0]      x_wdata,
  input  logic              wc_we,
  input  logic [CAW-1:0]    wc_waddr,
  input  logic [127:0]      wc_wdata,
  input  logic              wi_valid,
  output logic              wi_ready,
  input  logic [WIW-1:0]    wi_data,
  // layer control
  input  logic              start,
  input  logic [NW-1:0]     cfg_n,
  input  logic [XAW:0]      cfg_tiles,
  input  logic [2:0]        cfg_cb,
  input  logic [2:0]        cfg_batch,
  input  logic              cfg_diag,
  output logic              busy,
  output logic              done,
  // result readout
  input  logic [NW-2:0]     out_addr,
  input  logic [EW-1:0]     out_lane,
  output fp16_t             out_data,
  // INT8 prefill access to the GEMM unit
  input  logic              pf_mode,
  input  logic              pf_load,
  input  logic [31:0]       pf_stat [COLS],
  input  logic              pf_valid,
  input  logic [31:0]       pf_strm [COLS],
  output logic              pf_out_valid [ROWS],
  output logic [31:0]       pf_out_int   [ROWS],
  // monitoring events
  output logic              ev_wi_stall,
  output logic              ev_oc_full,
  output logic              ev_overlap,
  // WI buffer occupancy, for the DRAM-side prefetcher
  output logic [$clog2(WI_DEPTH):0] wi_level
);

  // ---------------- controller ----------------
  logic [XAW-1:0]    x_raddr;
  logic [CAW-1:0]    wc_raddr;
  logic              c_load, c_strm_valid;
  logic [GTAG_W-1:0] c_strm_tag;
  logic              fifo_valid, fifo_ready;
  logic              eu_valid, eu_first, eu_diag;
  logic [NW-1:0]     eu_col;
  logic [SW-1:0]     eu_slot [NUM_EU];
  logic [EW-1:0]     eu_lane [NUM_EU];
  logic [NUM_EU-1:0] out_mask;

  controller #(
    .NUM_EU(NUM_EU), .ROWS(ROWS), .COLS(COLS), .ENTRIES(ENTRIES), .SLOTS(SLOTS),
    .N_MAX(N_MAX), .IN_DEPTH(IN_DEPTH), .MAX_CB(MAX_CB)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_n, .cfg_tiles, .cfg_cb, .cfg_batch, .cfg_diag,
    .busy, .done, .x_raddr, .wc_raddr,
    .g_load(c_load), .g_strm_valid(c_strm_valid), .g_strm_tag(c_strm_tag),
    .wi_valid(fifo_valid), .wi_ready(fifo_ready),
    .eu_valid, .eu_col, .eu_first, .eu_diag, .eu_slot, .eu_lane, .out_mask,
    .ev_wi_stall, .ev_oc_full, .ev_overlap
  );

  // ---------------- buffers ----------------
  logic [127:0] x_rdata, wc_rdata;
  logic [WIW-1:0] fifo_data;

  input_buffer #(.DEPTH(IN_DEPTH), .WIDTH(128)) u_xbuf (
    .clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(x_raddr), .rdata(x_rdata)
  );

  wc_buffer #(.MAX_CB(MAX_CB), .ENTRIES(ENTRIES), .WIDTH(128)) u_wcbuf (
    .clk, .we(wc_we), .waddr(wc_waddr), .wdata(wc_wdata), .raddr(wc_raddr), .rdata(wc_rdata)
  );

  wi_buffer #(.DEPTH(WI_DEPTH), .LANES(NUM_EU), .ROWS(ROWS), .IDX_W(IDX_W)) u_wibuf (
    .clk, .rst_n, .in_valid(wi_valid), .in_ready(wi_ready), .in_data(wi_data),
    .out_valid(fifo_valid), .out_ready(fifo_ready), .out_data(fifo_data), .count(wi_level)
  );

  // ---------------- GEMM unit (VQ decoding or INT8 prefill) ----------------
  logic              prefill;
  pe_mode_e          g_mode;
  logic              g_load, g_valid;
  logic [31:0]       g_stat [COLS];
  logic [31:0]       g_strm [COLS];
  logic              g_out_valid [ROWS];
  logic [GTAG_W-1:0] g_out_tag   [ROWS];
  fp16_t             g_out_fp16  [ROWS];
  logic [31:0]       g_out_int   [ROWS];

  assign prefill = pf_mode && !busy;
  assign g_mode  = prefill ? MODE_INT8 : MODE_FP16;
  assign g_load  = prefill ? pf_load  : c_load;
  assign g_valid = prefill ? pf_valid : c_strm_valid;
  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign g_stat[c] = prefill ? pf_stat[c] : {16'h0, x_rdata[16*c +: 16]};
    assign g_strm[c] = prefill ? pf_strm[c] : {16'h0, wc_rdata[16*c +: 16]};
  end

  gemm_unit #(.ROWS(ROWS), .COLS(COLS), .TAG_W(GTAG_W)) u_gemm (
    .clk, .rst_n, .mode(g_mode), .load(g_load), .stat_in(g_stat),
    .strm_valid(g_valid), .strm_tag(prefill ? '0 : c_strm_tag), .strm_in(g_strm),
    .out_valid(g_out_valid), .out_tag(g_out_tag), .out_fp16(g_out_fp16), .out_int(g_out_int)
  );

  // ---------------- output codebook buffer ----------------
  logic          oc_wr_en   [ROWS];
  logic [EW-1:0] oc_wr_eu   [ROWS];
  logic [SW-1:0] oc_wr_slot [ROWS];
  logic [IW-1:0] oc_wr_idx  [ROWS];
  logic [IW-1:0] oc_rd_idx  [NUM_EU][ROWS];
  fp16_t         oc_rd_data [NUM_EU][ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_ocw
    assign oc_wr_en[r]   = g_out_valid[r] && (g_mode == MODE_FP16);
    assign oc_wr_eu[r]   = g_out_tag[r][GTAG_W-1 -: EW];
    assign oc_wr_slot[r] = g_out_tag[r][IW +: SW];
    assign oc_wr_idx[r]  = g_out_tag[r][IW-1:0];
    assign pf_out_valid[r] = g_out_valid[r] && (g_mode == MODE_INT8);
    assign pf_out_int[r]   = g_out_int[r];
  end

  oc_buffer #(.NUM_EU(NUM_EU), .ROWS(ROWS), .ENTRIES(ENTRIES), .SLOTS(SLOTS)) u_ocbuf (
    .clk, .wr_en(oc_wr_en), .wr_eu(oc_wr_eu), .wr_slot(oc_wr_slot), .wr_idx(oc_wr_idx),
    .wr_data(g_out_fp16), .rd_slot(eu_slot), .rd_idx(oc_rd_idx), .rd_data(oc_rd_data)
  );

  // ---------------- epilogue units ----------------
  localparam int unsigned ETAG_W = NW + 1;
  logic              e_out_valid [NUM_EU];
  logic [ETAG_W-1:0] e_out_tag   [NUM_EU];
  ext_t              e_out_sum   [NUM_EU];

  for (genvar e = 0; e < NUM_EU; e++) begin : g_eu
    logic [IDX_W-1:0] idx [ROWS];
    for (genvar r = 0; r < ROWS; r++) begin : g_idx
      assign idx[r] = fifo_data[(int'(eu_lane[e]) * ROWS + r) * IDX_W +: IDX_W];
    end
    epilogue_unit #(.ROWS(ROWS), .IDX_W(IDX_W), .TAG_W(ETAG_W)) u_eu (
      .clk, .rst_n, .diag(eu_diag), .in_valid(eu_valid), .in_tag({eu_first, eu_col}),
      .in_idx(idx), .oc_idx(oc_rd_idx[e]), .oc_data(oc_rd_data[e]),
      .out_valid(e_out_valid[e]), .out_tag(e_out_tag[e]), .out_sum(e_out_sum[e])
    );
  end

  // ---------------- per-request reduction and output buffer ----------------
  // Output lane b collects the EUs e with e % batch == b (all four EUs for a
  // single request).
  logic [2:0] cfg_batch_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_batch_q <= 3'd1;
    else if (start && !busy) cfg_batch_q <= (cfg_batch == 3'd0) ? 3'd1 : cfg_batch;
  end

  ext_t red [NUM_EU];
  always_comb begin
    for (int b = 0; b < NUM_EU; b++) red[b] = EXT_ZERO;
    for (int e = 0; e < NUM_EU; e++) begin
      logic [EW-1:0] b;
      b = EW'(e % int'(cfg_batch_q));
      red[b] = ext_add(red[b], e_out_sum[e], 1'b0);
    end
  end

  output_buffer #(.N_MAX(N_MAX), .LANES(NUM_EU)) u_obuf (
    .clk, .acc_valid(e_out_valid[0]), .acc_first(e_out_tag[0][ETAG_W-1]),
    .acc_addr((NW-1)'(e_out_tag[0][NW-1:0])), .acc_mask(out_mask), .acc_val(red),
    .rd_addr(out_addr), .rd_lane(out_lane), .rd_data(out_data)
  );

  a_eu_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                   e_out_valid[0] |-> e_out_valid[NUM_EU-1] && e_out_tag[0] == e_out_tag[NUM_EU-1]);

endmodule
