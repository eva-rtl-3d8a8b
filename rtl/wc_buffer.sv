// wc_buffer: on-chip SRAM for the weight codebooks (WC).
//
// Holds up to MAX_CB = 4 additive codebooks of ENTRIES = 256 centroids; each
// centroid is d = 8 FP16 values (128 bits) at address cb*256 + j. This is
// 16 KB, the codebook buffer size of the design. The codebooks stay
// resident for a whole layer and are read one centroid per cycle while the
// GEMM unit streams them. One write port and one read port with a
// one-cycle registered read; the port structure is this implementation's
// choice.
module wc_buffer #(
  parameter int unsigned MAX_CB  = 4,
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned WIDTH   = 128,
  localparam int unsigned DEPTH  = MAX_CB * ENTRIES,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
