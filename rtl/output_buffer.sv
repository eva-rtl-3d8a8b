// output_buffer: partial-sum buffer for the output vector y.
//
// Holds LANES vectors of N_MAX partial sums in the extended format of
// eva_pkg (one vector per request when several requests share weight tiles;
// lane 0 only for a single request). Each epilogue pass adds its reduced
// column sums into the buffer: when acc_valid is high, every lane selected
// by acc_mask gets mem[lane][acc_addr] += acc_val[lane] (or = acc_val when
// acc_first marks the first pass of a layer). The read-modify-write takes a
// single cycle, so back-to-back columns never conflict.
// Read side: rd_addr/rd_lane select an entry; rd_data, one cycle later, is
// it rounded to FP16 (nearest even) for write-back to DRAM.
// Accumulating tile by tile in an on-chip output buffer follows the paper;
// the lanes, the extended-format storage and the port timing are this
// implementation's choices.
module output_buffer
  import eva_pkg::*;
#(
  parameter int unsigned N_MAX = 4096,
  parameter int unsigned LANES = 4,
  localparam int unsigned AW   = $clog2(N_MAX),
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  input  logic          acc_valid,
  input  logic          acc_first,
  input  logic [AW-1:0] acc_addr,
  input  logic [LANES-1:0] acc_mask,
  input  ext_t          acc_val [LANES],
  input  logic [AW-1:0] rd_addr,
  input  logic [LW-1:0] rd_lane,
  output fp16_t         rd_data
);

  ext_t mem [LANES][N_MAX];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (acc_valid && acc_mask[l])
        mem[l][acc_addr] <= acc_first ? acc_val[l] : ext_add(mem[l][acc_addr], acc_val[l], 1'b0);
    end
  end

  always_ff @(posedge clk) rd_data <= ext_to_fp16(mem[rd_lane][rd_addr]);

endmodule
