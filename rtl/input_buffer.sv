// input_buffer: on-chip SRAM for the decoding input X.
//
// The input vector x (1 x K, FP16) is stored reshaped into rows of d = 8
// FP16 values, one row per address, so a v x d input tile is v consecutive
// rows. With several requests (batch), request b uses rows b*V .. b*V+V-1.
// DEPTH = 2048 rows of 128 bits is 32 KB, the input buffer size of the
// design. One write port (fill from DRAM) and one read port with a
// one-cycle registered read (preload of the GEMM unit). The row layout and
// the port structure are this implementation's choices.
module input_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
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
