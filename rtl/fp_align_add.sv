// fp_align_add: the FP16 adder of an EVA processing element, i.e. an
// exponent-alignment stage in front of the 32-bit integer adder that the
// INT8 array already has.
//
// Both operands are in the extended format of eva_pkg (value = m * 2^(e-56)).
// The operand with the smaller exponent is shifted right by the exponent
// difference (bits shifted out are dropped), the mantissas are added, and if
// the sum reaches 2^30 in magnitude it is shifted right once and the exponent
// incremented, so partial sums never overflow the 32-bit adder. With
// int_mode set the exponents are ignored and the block is a plain INT32
// adder, which is how the INT8 mode accumulates.
// Alignment before the reused 32-bit adder is the paper's structure; the
// extended format, truncating alignment and overflow renormalisation are
// this implementation's choices. Purely combinational.
module fp_align_add
  import eva_pkg::*;
(
  input  logic int_mode,
  input  ext_t a,
  input  ext_t b,
  output ext_t y
);

  assign y = ext_add(a, b, int_mode);

endmodule
