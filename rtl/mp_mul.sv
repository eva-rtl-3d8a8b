// mp_mul: the reconfigurable multiplier inside one EVA processing element.
//
// Four 9x9 signed multipliers (the "INT8 multipliers" of the base array) are
// shared by two modes:
//  * INT8 mode: lane i multiplies the signed bytes a[8i+:8] and b[8i+:8];
//    the four products are returned in int_prod.
//  * FP16 mode: a[15:0] and b[15:0] are FP16 numbers (sign, 5-bit exponent,
//    10-bit mantissa). The 11-bit significands are split into a 3-bit high
//    and an 8-bit low part, the four partial products hh, hl, lh, ll are
//    formed by the same multipliers and summed with shifts into the 22-bit
//    significand product. The sign is an XOR and the exponent a 6-bit add.
//    The product is returned in the extended format of eva_pkg
//    (m = +/-(P << 6), e = ea + eb). Subnormal inputs count as zero;
//    infinities and NaNs are not treated specially.
// The sharing of four INT8 multipliers, the sign XOR and the 6-bit exponent
// adder follow the paper; the 3/8-bit split and the 9-bit signed
// multipliers that serve both modes are this implementation's choices.
// Purely combinational.
module mp_mul
  import eva_pkg::*;
(
  input  pe_mode_e                  mode,
  input  logic        [31:0]        a,
  input  logic        [31:0]        b,
  output logic signed [17:0]        int_prod [4],
  output ext_t                      fp_prod
);

  logic signed [8:0]  ma [4];
  logic signed [8:0]  mb [4];
  logic signed [17:0] p  [4];

  logic [10:0] sa, sb;           // significands with hidden one
  logic        a_zero, b_zero;
  logic        sgn;
  logic [5:0]  exp_sum;
  logic [21:0] sig_prod;

  assign sa     = {1'b1, a[9:0]};
  assign sb     = {1'b1, b[9:0]};
  assign a_zero = (a[14:10] == 5'd0);
  assign b_zero = (b[14:10] == 5'd0);

  always_comb begin
    if (mode == MODE_INT8) begin
      for (int i = 0; i < 4; i++) begin
        ma[i] = {a[8*i+7], a[8*i +: 8]};
        mb[i] = {b[8*i+7], b[8*i +: 8]};
      end
    end else begin
      // lane 0: lo*lo, lane 1: lo*hi, lane 2: hi*lo, lane 3: hi*hi
      ma[0] = {1'b0, sa[7:0]};           mb[0] = {1'b0, sb[7:0]};
      ma[1] = {1'b0, sa[7:0]};           mb[1] = {6'b0, sb[10:8]};
      ma[2] = {6'b0, sa[10:8]};          mb[2] = {1'b0, sb[7:0]};
      ma[3] = {6'b0, sa[10:8]};          mb[3] = {6'b0, sb[10:8]};
    end
    for (int i = 0; i < 4; i++) p[i] = ma[i] * mb[i];
  end

  assign int_prod = p;

  // The "16-bit multiplier" sum of the four partial products.
  assign sig_prod = 22'(p[0]) + (22'(p[1]) << 8) + (22'(p[2]) << 8) + (22'(p[3]) << 16);
  assign sgn      = a[15] ^ b[15];
  assign exp_sum  = {1'b0, a[14:10]} + {1'b0, b[14:10]};

  always_comb begin
    logic signed [31:0] mag;
    mag = signed'({4'b0, sig_prod, 6'b0});
    if (mode != MODE_FP16 || a_zero || b_zero) begin
      fp_prod = EXT_ZERO;
    end else begin
      fp_prod.e = {2'b0, exp_sum};
      fp_prod.m = sgn ? -mag : mag;
    end
  end

endmodule
