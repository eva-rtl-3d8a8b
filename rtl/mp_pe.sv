// mp_pe: mixed-precision processing element of the EVA GEMM unit.
//
// Each cycle it performs either one FP16 multiply-accumulate or four INT8
// multiply-accumulates, using the shared multiplier mp_mul and the adder
// fp_align_add.
//  * The stationary operand (FP16 input element in FP16 mode, four INT8
//    weights in INT8 mode) sits in stat_q. While load is high the stationary
//    registers of a column form a shift chain: stat_q takes stat_in and
//    stat_out passes the old value to the PE below.
//  * The streamed operand (FP16 codebook element, or four INT8 activations)
//    arrives on strm_in, is used in the same cycle and is passed to the PE
//    below through one register (strm_out).
//  * The partial sum arrives from the left on psum_in; the PE adds its
//    product(s) and registers the result on psum_out for the PE on its right.
// One FP16 or four INT8 operations per cycle and the reuse of the INT8
// multipliers and INT32 adder follow the paper; the movement directions and
// the shift-chain preload are this implementation's choices.
// Latency: one cycle from strm_in/psum_in to strm_out/psum_out.
module mp_pe
  import eva_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  pe_mode_e    mode,
  input  logic        load,
  input  logic [31:0] stat_in,
  output logic [31:0] stat_out,
  input  logic [31:0] strm_in,
  output logic [31:0] strm_out,
  input  ext_t        psum_in,
  output ext_t        psum_out
);

  logic [31:0]        stat_q;
  logic signed [17:0] int_prod [4];
  ext_t               fp_prod;
  ext_t               addend;
  ext_t               sum;

  mp_mul u_mul (
    .mode    (mode),
    .a       (stat_q),
    .b       (strm_in),
    .int_prod(int_prod),
    .fp_prod (fp_prod)
  );

  always_comb begin
    if (mode == MODE_INT8) begin
      addend.e = 8'd0;
      addend.m = 32'(int_prod[0]) + 32'(int_prod[1]) + 32'(int_prod[2]) + 32'(int_prod[3]);
    end else begin
      addend = fp_prod;
    end
  end

  fp_align_add u_add (
    .int_mode(mode == MODE_INT8),
    .a       (psum_in),
    .b       (addend),
    .y       (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_q   <= '0;
      strm_out <= '0;
      psum_out <= EXT_ZERO;
    end else begin
      if (load) stat_q <= stat_in;
      strm_out <= strm_in;
      psum_out <= sum;
    end
  end

  assign stat_out = stat_q;

endmodule
