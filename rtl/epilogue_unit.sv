// epilogue_unit: conflict-free output-codebook lookup and add-only
// reduction (one EU).
//
// Each cycle the EU accepts one column of the weight-index tile: ROWS = 32
// indices, index r belonging to row r of the tile. Row r's index addresses
// bank r of the EU's output codebook, so the 32 lookups of a column read 32
// different banks and never conflict. The 32 FP16 entries fetched are
// already dot products of d = 8 inputs with a centroid, so adding them
// replaces 32 x 8 multiply-accumulates. Two reduction schemes, chosen by
// diag:
//  * vertical (diag = 0): all 32 lookups of a column are issued together and
//    summed by a 32-input adder tree; one column sum per cycle, out_valid
//    two cycles after in_valid (one for the OC read, one for the tree).
//  * diagonal (diag = 1): row r performs its lookup r cycles after the
//    column was accepted, and a chain of 32 adders carries the partial sum
//    from row 0 to row 31 one row per cycle, so in one cycle the rows work
//    on 32 different output columns. Still one column sum per cycle;
//    out_valid ROWS + 1 cycles after in_valid.
// The tag (column number and flags) travels with the column. Sums are in the
// extended format of eva_pkg; OC entries are converted from FP16 on entry.
// Interface: oc_idx[r] goes to bank r of this EU's OC slot, oc_data[r] must
// be that bank's registered read data (one cycle later).
// The bank-per-row lookup, the 32-input adder tree and the diagonal scheme
// follow the paper; the chain direction, the latencies and the use of
// separate adders for the two schemes are this implementation's choices.
module epilogue_unit
  import eva_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned IDX_W = 8,
  parameter int unsigned TAG_W = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             diag,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [IDX_W-1:0] in_idx  [ROWS],
  output logic [IDX_W-1:0] oc_idx  [ROWS],
  input  fp16_t            oc_data [ROWS],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output ext_t             out_sum
);

  // ---------------- index skew for the diagonal scheme ----------------
  logic [IDX_W-1:0] idx_d [ROWS][ROWS];   // idx_d[r][k]: row r delayed k+1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < ROWS; k++) idx_d[r][k] <= '0;
    end else begin
      for (int r = 1; r < ROWS; r++) begin
        idx_d[r][0] <= in_idx[r];
        for (int k = 1; k < r; k++) idx_d[r][k] <= idx_d[r][k-1];
      end
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_idx
    if (r == 0) begin : g_r0
      assign oc_idx[r] = in_idx[r];
    end else begin : g_rn
      assign oc_idx[r] = diag ? idx_d[r][r-1] : in_idx[r];
    end
  end

  // ---------------- vertical: 32-input adder tree ----------------
  logic             v1_valid;
  logic [TAG_W-1:0] v1_tag;
  logic             vt_valid;
  logic [TAG_W-1:0] vt_tag;
  ext_t             vt_sum;
  ext_t             tree_sum;

  always_comb begin
    ext_t lvl [ROWS];
    int   n;
    for (int r = 0; r < ROWS; r++) lvl[r] = fp16_to_ext(oc_data[r]);
    n = ROWS;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) lvl[i] = ext_add(lvl[2*i], lvl[2*i+1], 1'b0);
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    tree_sum = lvl[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_valid <= 1'b0; v1_tag <= '0;
      vt_valid <= 1'b0; vt_tag <= '0; vt_sum <= EXT_ZERO;
    end else begin
      v1_valid <= in_valid && !diag;
      v1_tag   <= in_tag;
      vt_valid <= v1_valid;
      vt_tag   <= v1_tag;
      vt_sum   <= tree_sum;
    end
  end

  // ---------------- diagonal: 32-stage adder chain ----------------
  ext_t             chain [ROWS];
  logic             dv [ROWS+1];
  logic [TAG_W-1:0] dt [ROWS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) chain[r] <= EXT_ZERO;
      for (int k = 0; k <= ROWS; k++) begin dv[k] <= 1'b0; dt[k] <= '0; end
    end else begin
      chain[0] <= fp16_to_ext(oc_data[0]);
      for (int r = 1; r < ROWS; r++) chain[r] <= ext_add(chain[r-1], fp16_to_ext(oc_data[r]), 1'b0);
      dv[0] <= in_valid && diag;
      dt[0] <= in_tag;
      for (int k = 1; k <= ROWS; k++) begin dv[k] <= dv[k-1]; dt[k] <= dt[k-1]; end
    end
  end

  assign out_valid = diag ? dv[ROWS]     : vt_valid;
  assign out_tag   = diag ? dt[ROWS]     : vt_tag;
  assign out_sum   = diag ? chain[ROWS-1] : vt_sum;

endmodule
