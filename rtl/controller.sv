// controller: sequencer of one EVA vector-quantised decoding layer.
//
// A layer computes y = x W for R requests (batch), where W is stored as
// C additive codebooks (WC) plus weight indices (WI). The input of each
// request is split into tiles of v = 32 rows of d = 8 FP16 values. Two loops
// run concurrently and meet in the OC buffer:
//  * Producer (GEMM side). For every group of tiles, every codebook c and
//    every EU e: wait until EU e has a free OC slot, preload the input tile
//    of EU e into the GEMM unit (ROWS cycles), stream the 256 centroids of
//    codebook c (256 cycles; the GEMM unit writes the resulting OC tile,
//    row r into bank r, into the slot) and let the array drain, then mark
//    the slot full.
//  * Consumer (epilogue side). For every group and codebook: wait until all
//    EUs have a full slot, then for each of the N output columns pop one WI
//    word (stalling while the WI buffer is empty) and hand each EU its 32
//    indices; after the last column, wait for the EUs to drain and free the
//    slots. The EU results are added into the output buffer; the first
//    pass of the layer overwrites instead of adding (tag bit).
// Batch reuse: with R = cfg_batch requests (1, 2 or 4), a group holds
// NUM_EU / R tiles; EU e works on request e % R of tile e / R and takes the
// indices of WI lane e / R, so one WI word serves R requests.
// Per group and codebook the producer needs NUM_EU x (ROWS + 256 + drain)
// cycles and the consumer N cycles, so for N = 4096 the epilogue is the
// bottleneck and the GEMM work is hidden behind it.
// Interface: start (one cycle, while idle) latches cfg_*; busy stays high
// until the last sum is in the output buffer; done pulses for one cycle.
// cfg_tiles must be a multiple of NUM_EU / cfg_batch.
// The tile-by-tile schedule, the overlap of GEMM and epilogue, the
// round-robin assignment of tiles to EUs and the sharing of WI tiles among
// requests follow the paper; lock-step EUs, one pass per codebook, the slot
// ring and all handshakes are this implementation's choices.
// Lint note: verilator reports SYNCASYNCNET on rst_n because the
// assertions use it in 'disable iff' while the flops use it as the
// asynchronous reset; assertions are not synthesised, so it stands.
module controller
  import eva_pkg::*;
#(
  parameter int unsigned NUM_EU   = 4,
  parameter int unsigned ROWS     = 32,
  parameter int unsigned COLS     = 8,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned SLOTS    = 3,
  parameter int unsigned N_MAX    = 4096,
  parameter int unsigned IN_DEPTH = 2048,
  parameter int unsigned MAX_CB   = 4,
  localparam int unsigned EW      = (NUM_EU > 1) ? $clog2(NUM_EU) : 1,
  localparam int unsigned SW      = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned IW      = $clog2(ENTRIES),
  localparam int unsigned NW      = $clog2(N_MAX) + 1,
  localparam int unsigned XAW     = $clog2(IN_DEPTH),
  localparam int unsigned CAW     = $clog2(MAX_CB * ENTRIES),
  localparam int unsigned GTAG_W  = EW + SW + IW,
  localparam int unsigned ETAG_W  = NW
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  logic              start,
  input  logic [NW-1:0]     cfg_n,        // output columns N (1..N_MAX)
  input  logic [XAW:0]      cfg_tiles,    // v-row tiles per request (V / 32)
  input  logic [2:0]        cfg_cb,       // codebooks C (1..MAX_CB)
  input  logic [2:0]        cfg_batch,    // requests (1, 2 or 4)
  input  logic              cfg_diag,     // EU scheme
  output logic              busy,
  output logic              done,
  // input buffer read
  output logic [XAW-1:0]    x_raddr,
  // codebook buffer read
  output logic [CAW-1:0]    wc_raddr,
  // GEMM unit control (data comes from the buffers' registered outputs)
  output logic              g_load,
  output logic              g_strm_valid,
  output logic [GTAG_W-1:0] g_strm_tag,
  // WI buffer read side
  input  logic              wi_valid,
  output logic              wi_ready,
  // EU issue
  output logic              eu_valid,
  output logic [ETAG_W-1:0] eu_col,
  output logic              eu_first,
  output logic              eu_diag,
  output logic [SW-1:0]     eu_slot [NUM_EU],
  output logic [EW-1:0]     eu_lane [NUM_EU],   // WI lane feeding each EU
  output logic [NUM_EU-1:0] out_mask,           // output-buffer lanes in use
  // events, for monitoring
  output logic              ev_wi_stall,
  output logic              ev_oc_full,
  output logic              ev_overlap
);

  typedef enum logic [2:0] {P_IDLE, P_WAIT, P_LOAD, P_STREAM, P_DRAIN} p_state_e;
  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_RUN, C_DRAIN} c_state_e;

  localparam int unsigned P_DRAIN_CYC = ROWS + COLS + 4;
  localparam int unsigned C_DRAIN_CYC = ROWS + 4;

  // latched configuration
  logic [NW-1:0]  n_q;
  logic [XAW:0]   tiles_q;
  logic [2:0]     cb_q;
  logic [2:0]     batch_q;
  logic           diag_q;
  logic [XAW:0]   groups_q;
  logic [1:0]     bsh_q;                 // log2(batch)

  p_state_e p_st;
  c_state_e c_st;

  logic [XAW:0]   pg;                    // producer group
  logic [2:0]     pc;                    // producer codebook
  logic [EW-1:0]  pe;                    // producer EU
  logic [8:0]     pcnt;
  logic [XAW:0]   cg;
  logic [2:0]     cc;
  logic [NW-1:0]  col;
  logic [7:0]     ccnt;

  logic [SW-1:0]  wslot [NUM_EU];
  logic [SW-1:0]  rslot [NUM_EU];
  logic [SW:0]    occ   [NUM_EU];

  logic           p_fill, c_free;
  logic           all_ready;
  logic           p_last, c_last;

  function automatic logic [SW-1:0] nxt_slot(input logic [SW-1:0] s);
    return (s == SW'(SLOTS - 1)) ? '0 : s + SW'(1);
  endfunction

  // tile and request handled by EU e in group g
  logic [XAW:0]   p_tile;
  logic [XAW:0]   p_req;
  logic [XAW+6:0] p_base;

  always_comb begin
    p_req  = (XAW+1)'(pe) & (XAW+1)'(batch_q - 3'd1);
    p_tile = (pg << (EW - int'(bsh_q))) + ((XAW+1)'(pe) >> bsh_q);
    p_base = (XAW+7)'(p_req) * (XAW+7)'(tiles_q) * (XAW+7)'(ROWS) + (XAW+7)'(p_tile) * (XAW+7)'(ROWS);
  end

  always_comb begin
    all_ready = 1'b1;
    for (int e = 0; e < NUM_EU; e++) if (occ[e] == '0) all_ready = 1'b0;
  end

  assign p_last = (int'(pe) == NUM_EU - 1) && (pc == cb_q - 3'd1) && (pg == groups_q - 1'b1);
  assign c_last = (cc == cb_q - 3'd1) && (cg == groups_q - 1'b1);
  assign p_fill = (p_st == P_DRAIN) && (pcnt == 9'(P_DRAIN_CYC - 1));
  assign c_free = (c_st == C_DRAIN) && (ccnt == 8'(C_DRAIN_CYC - 1));

  // ---------------- producer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_st <= P_IDLE; pg <= '0; pc <= '0; pe <= '0; pcnt <= '0;
      n_q <= '0; tiles_q <= '0; cb_q <= 3'd1; batch_q <= 3'd1; diag_q <= 1'b0;
      groups_q <= '0; bsh_q <= '0;
    end else begin
      case (p_st)
        P_IDLE: if (start && !busy) begin
          n_q <= cfg_n; tiles_q <= cfg_tiles; cb_q <= cfg_cb; batch_q <= cfg_batch; diag_q <= cfg_diag;
          case (cfg_batch)
            3'd4:    begin bsh_q <= 2'd2; groups_q <= cfg_tiles >> (EW - 2); end
            3'd2:    begin bsh_q <= 2'd1; groups_q <= cfg_tiles >> (EW - 1); end
            default: begin bsh_q <= 2'd0; groups_q <= cfg_tiles >> EW;       end
          endcase
          pg <= '0; pc <= '0; pe <= '0;
          p_st <= P_WAIT;
        end
        P_WAIT: if (occ[pe] < (SW+1)'(SLOTS)) begin
          pcnt <= '0;
          p_st <= P_LOAD;
        end
        P_LOAD: begin
          pcnt <= pcnt + 9'd1;
          if (pcnt == 9'(ROWS - 1)) begin pcnt <= '0; p_st <= P_STREAM; end
        end
        P_STREAM: begin
          pcnt <= pcnt + 9'd1;
          if (pcnt == 9'(ENTRIES - 1)) begin pcnt <= '0; p_st <= P_DRAIN; end
        end
        P_DRAIN: begin
          pcnt <= pcnt + 9'd1;
          if (p_fill) begin
            pcnt <= '0;
            if (p_last) p_st <= P_IDLE;
            else begin
              p_st <= P_WAIT;
              if (int'(pe) == NUM_EU - 1) begin
                pe <= '0;
                if (pc == cb_q - 3'd1) begin pc <= '0; pg <= pg + 1'b1; end
                else pc <= pc + 3'd1;
              end else pe <= pe + EW'(1);
            end
          end
        end
        default: p_st <= P_IDLE;
      endcase
    end
  end

  assign x_raddr  = XAW'(p_base + (XAW+7)'(ROWS - 1) - (XAW+7)'(pcnt));
  assign wc_raddr = CAW'({pc, IW'(pcnt)});

  // buffer reads are registered: GEMM control follows one cycle later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_load <= 1'b0; g_strm_valid <= 1'b0; g_strm_tag <= '0;
    end else begin
      g_load       <= (p_st == P_LOAD);
      g_strm_valid <= (p_st == P_STREAM);
      g_strm_tag   <= {pe, wslot[pe], IW'(pcnt)};
    end
  end

  // ---------------- consumer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st <= C_IDLE; cg <= '0; cc <= '0; col <= '0; ccnt <= '0;
    end else begin
      case (c_st)
        C_IDLE: if (start && !busy) begin
          cg <= '0; cc <= '0;
          c_st <= C_WAIT;
        end
        C_WAIT: if (all_ready) begin col <= '0; c_st <= C_RUN; end
        C_RUN: if (wi_valid) begin
          col <= col + 1'b1;
          if (col == n_q - 1'b1) begin ccnt <= '0; c_st <= C_DRAIN; end
        end
        C_DRAIN: begin
          ccnt <= ccnt + 8'd1;
          if (c_free) begin
            if (c_last) c_st <= C_IDLE;
            else begin
              c_st <= C_WAIT;
              if (cc == cb_q - 3'd1) begin cc <= '0; cg <= cg + 1'b1; end
              else cc <= cc + 3'd1;
            end
          end
        end
        default: c_st <= C_IDLE;
      endcase
    end
  end

  assign wi_ready = (c_st == C_RUN);
  assign eu_valid = (c_st == C_RUN) && wi_valid;
  assign eu_col   = col;
  assign eu_first = (cg == '0) && (cc == '0);
  assign eu_diag  = diag_q;

  for (genvar e = 0; e < NUM_EU; e++) begin : g_eu
    assign eu_slot[e] = rslot[e];
    assign eu_lane[e] = EW'(e >> bsh_q);
    assign out_mask[e] = (e < int'(batch_q));
  end

  // ---------------- slot ring bookkeeping ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NUM_EU; e++) begin
        wslot[e] <= '0; rslot[e] <= '0; occ[e] <= '0;
      end
    end else begin
      for (int e = 0; e < NUM_EU; e++) begin
        logic inc, dec;
        inc = p_fill && (int'(pe) == e);
        dec = c_free;
        if (inc) wslot[e] <= nxt_slot(wslot[e]);
        if (dec) rslot[e] <= nxt_slot(rslot[e]);
        occ[e] <= occ[e] + (SW+1)'(inc) - (SW+1)'(dec);
      end
    end
  end

  // ---------------- status ----------------
  logic busy_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) busy_q <= 1'b1;
      else if (busy_q && c_free && c_last) begin busy_q <= 1'b0; done <= 1'b1; end
    end
  end
  assign busy = busy_q;

  assign ev_wi_stall = (c_st == C_RUN) && !wi_valid;
  assign ev_oc_full  = (p_st == P_WAIT) && (occ[pe] >= (SW+1)'(SLOTS));
  assign ev_overlap  = (p_st == P_STREAM) && (c_st == C_RUN);

  a_occ_bound: assert property (@(posedge clk) disable iff (!rst_n) occ[0] <= (SW+1)'(SLOTS));
  a_batch_ok:  assert property (@(posedge clk) disable iff (!rst_n)
                 start && !busy |-> (cfg_batch == 3'd1 || cfg_batch == 3'd2 || cfg_batch == 3'd4));

endmodule
