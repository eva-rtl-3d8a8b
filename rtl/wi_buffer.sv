// wi_buffer: streaming buffer for the weight-index (WI) matrix.
//
// The WI matrix is too large to keep on chip, so it is streamed from DRAM
// through this FIFO. Each entry is one WI column for all epilogue-unit
// lanes: LANES x ROWS indices of IDX_W bits (4 x 32 x 8 = 1024 bits, i.e.
// the 128 indices the four EUs consume per cycle). DEPTH = 2048 entries is
// 256 KB, the weight buffer size of the design.
// Both sides use valid/ready: a word moves when valid and ready are both
// high at a clock edge. The output is taken straight from the storage
// (first-word fall-through). The FIFO organisation and handshake are this
// implementation's choices.
// Lint note: verilator reports SYNCASYNCNET on rst_n because the
// assertions use it in 'disable iff' while the flops use it as the
// asynchronous reset; assertions are not synthesised, so it stands.
module wi_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned LANES = 4,
  parameter int unsigned ROWS  = 32,
  parameter int unsigned IDX_W = 8,
  localparam int unsigned W    = LANES * ROWS * IDX_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic [AW:0]   count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + AW'(1);
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_stable_data:  assert property (@(posedge clk) disable iff (!rst_n)
                    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
