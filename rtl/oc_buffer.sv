// oc_buffer: the output-codebook (OC) buffer that makes EVA's lookups
// conflict free.
//
// For each of NUM_EU epilogue units there are ROWS = 32 banks, one per row
// of the OC tile (one per input vector of the tile). Each bank holds SLOTS
// OC tiles of ENTRIES = 256 FP16 entries. The GEMM unit writes row r of an
// OC tile only into bank r, and an epilogue unit reads exactly one entry per
// bank per cycle (row r's weight index addresses bank r), so the 32 reads of
// a cycle can never collide. 4 EUs x 3 slots x 32 banks x 256 x 2 B =
// 192 KB, the OC buffer size of the design.
// Write side: per bank, wr_en/wr_eu/wr_slot/wr_idx/wr_data (rows of the
// GEMM unit finish on different cycles, so every bank has its own write
// port). Read side: per EU, one slot number and one index per bank;
// rd_data is registered (available one cycle after rd_idx).
// One bank per OC row follows the paper; the slot ring and the port timing
// are this implementation's choices.
module oc_buffer
  import eva_pkg::*;
#(
  parameter int unsigned NUM_EU  = 4,
  parameter int unsigned ROWS    = 32,
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned SLOTS   = 3,
  localparam int unsigned EW     = (NUM_EU > 1) ? $clog2(NUM_EU) : 1,
  localparam int unsigned SW     = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned IW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          wr_en   [ROWS],
  input  logic [EW-1:0] wr_eu   [ROWS],
  input  logic [SW-1:0] wr_slot [ROWS],
  input  logic [IW-1:0] wr_idx  [ROWS],
  input  fp16_t         wr_data [ROWS],
  input  logic [SW-1:0] rd_slot [NUM_EU],
  input  logic [IW-1:0] rd_idx  [NUM_EU][ROWS],
  output fp16_t         rd_data [NUM_EU][ROWS]
);

  for (genvar e = 0; e < NUM_EU; e++) begin : g_eu
    for (genvar r = 0; r < ROWS; r++) begin : g_bank
      fp16_t mem [SLOTS * ENTRIES];
      always_ff @(posedge clk) begin
        if (wr_en[r] && wr_eu[r] == EW'(e))
          mem[int'(wr_slot[r]) * ENTRIES + int'(wr_idx[r])] <= wr_data[r];
        rd_data[e][r] <= mem[int'(rd_slot[e]) * ENTRIES + int'(rd_idx[e][r])];
      end
    end
  end

endmodule
