// gemm_unit: the reconfigurable systolic GEMM unit of EVA.
//
// A grid of ROWS x COLS mixed-precision PEs (mp_pe). In FP16 mode it is a
// 32x8 input-stationary array: PE(r,c) holds element X[r][c] of a v x d
// input tile, and one d-element codebook centroid B[:,j] is streamed in per
// cycle, so row r produces the output-codebook entry O[r][j] = X[r,:].B[:,j].
// A full 256-entry codebook takes 256 streaming cycles per tile. In INT8
// mode every PE carries four INT8 lanes, giving a 32x32 weight-stationary
// array: PE(r,c) lane i holds W[r][4c+i] and the streamed vector holds 32
// activations, so row r produces the INT32 dot product of row r of W with
// the activations.
//
// Interface and timing:
//  * load: for ROWS cycles stat_in is shifted in at the top; the row
//    presented first ends in the bottom row. Do not load while streamed data
//    is still inside the array.
//  * strm_valid/strm_tag/strm_in: one unskewed streamed vector per cycle.
//    The unit inserts the diagonal skew (column c is delayed c cycles).
//  * out_valid[r]/out_tag[r]/out_fp16[r]/out_int[r]: the result of row r for
//    the vector presented at cycle t appears, registered, at cycle
//    t + r + COLS + 1, with the tag that came with it. out_fp16 is the row's
//    sum rounded to FP16 (nearest even), out_int the raw INT32 sum.
// Array shape, reconfiguration and the 256-cycle VQ-GEMM follow the paper;
// operand directions, skewing, tags and the FP16 rounding are this
// implementation's choices.
module gemm_unit
  import eva_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 8,
  parameter int unsigned TAG_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_mode_e          mode,
  input  logic              load,
  input  logic [31:0]       stat_in    [COLS],
  input  logic              strm_valid,
  input  logic [TAG_W-1:0]  strm_tag,
  input  logic [31:0]       strm_in    [COLS],
  output logic              out_valid  [ROWS],
  output logic [TAG_W-1:0]  out_tag    [ROWS],
  output fp16_t             out_fp16   [ROWS],
  output logic [31:0]       out_int    [ROWS]
);

  localparam int unsigned PIPE = ROWS + COLS;

  // PE interconnect
  logic [31:0] stat_v [ROWS+1][COLS];
  logic [31:0] strm_v [ROWS+1][COLS];
  ext_t        psum_h [ROWS][COLS+1];

  // input skew: column c passes through c registers
  logic [31:0] skew_q [COLS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++)
        for (int k = 0; k < COLS; k++) skew_q[c][k] <= '0;
    end else begin
      for (int c = 1; c < COLS; c++) begin
        skew_q[c][0] <= strm_valid ? strm_in[c] : 32'd0;
        for (int k = 1; k < c; k++) skew_q[c][k] <= skew_q[c][k-1];
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign stat_v[0][c] = stat_in[c];
    if (c == 0) begin : g_c0
      assign strm_v[0][c] = strm_valid ? strm_in[0] : 32'd0;
    end else begin : g_cn
      assign strm_v[0][c] = skew_q[c][c-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign psum_h[r][0] = EXT_ZERO;
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mp_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .mode    (mode),
        .load    (load),
        .stat_in (stat_v[r][c]),
        .stat_out(stat_v[r+1][c]),
        .strm_in (strm_v[r][c]),
        .strm_out(strm_v[r+1][c]),
        .psum_in (psum_h[r][c]),
        .psum_out(psum_h[r][c+1])
      );
    end
  end

  // valid/tag delay line, tapped once per row
  logic             vpipe [PIPE];
  logic [TAG_W-1:0] tpipe [PIPE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < PIPE; k++) begin
        vpipe[k] <= 1'b0;
        tpipe[k] <= '0;
      end
    end else begin
      vpipe[0] <= strm_valid;
      tpipe[0] <= strm_tag;
      for (int k = 1; k < PIPE; k++) begin
        vpipe[k] <= vpipe[k-1];
        tpipe[k] <= tpipe[k-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        out_valid[r] <= 1'b0;
        out_tag[r]   <= '0;
        out_fp16[r]  <= '0;
        out_int[r]   <= '0;
      end
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        out_valid[r] <= vpipe[r+COLS-1];
        out_tag[r]   <= tpipe[r+COLS-1];
        out_fp16[r]  <= ext_to_fp16(psum_h[r][COLS]);
        out_int[r]   <= psum_h[r][COLS].m;
      end
    end
  end

endmodule
