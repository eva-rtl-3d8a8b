// tb_fp_align_add: checks the alignment + 32-bit adder. Integer mode is
// compared exactly with INT32 addition; FP mode adds random FP16 values
// and products (extended format) and compares with the real sum, allowing
// the truncation of the alignment shift (2^-20 of the larger operand).
// It also checks operands far apart in exponent and the overflow
// renormalisation when two large mantissas of one sign are added.
module tb_fp_align_add;
  import eva_pkg::*;
  import tb_util_pkg::*;

  logic int_mode;
  ext_t a, b, y;
  int checks = 0, failures = 0;

  fp_align_add dut (.int_mode(int_mode), .a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_fp();
    real ra, rb, ry, tol;
    ra = x2r(a.e, a.m); rb = x2r(b.e, b.m); ry = x2r(y.e, y.m);
    tol = (absr(ra) > absr(rb) ? absr(ra) : absr(rb)) * pow2(-20);
    checks++;
    if (absr(ry - (ra + rb)) > tol || y.m > 32'sd1073741823 || y.m < -32'sd1073741824) begin
      failures++;
      if (failures < 10) $display("FP add %g + %g = %g (got e=%0d m=%0d)", ra, rb, ry, y.e, y.m);
    end
  endtask

  initial begin
    int_mode = 1'b1;
    for (int t = 0; t < 200; t++) begin
      a.e = 8'($urandom); a.m = $urandom;
      b.e = 8'($urandom); b.m = $urandom;
      #1;
      checks++;
      if (y.m != a.m + b.m) failures++;
    end
    int_mode = 1'b0;
    for (int t = 0; t < 1000; t++) begin
      a = fp16_to_ext(rand_h(5, 25));
      b = fp16_to_ext(rand_h(5, 25));
      if (t % 3 == 1) begin a.m = a.m <<< 5; a.e = a.e - 8'd5; end   // unnormalised operands
      if (t % 5 == 2) b.m = 32'sd0;                                  // zero operand
      #1;
      check_fp();
    end
    // overflow renormalisation: |sum| would reach 2^31
    a.e = 8'd40; a.m = 32'sd1073741000;
    b.e = 8'd40; b.m = 32'sd1073741000;
    #1;
    check_fp();
    checks++;
    if (y.e != 8'd41) failures++;
    a.m = -32'sd1073741000; b.m = -32'sd1073741000;
    #1;
    check_fp();
    // far-apart exponents: the small operand disappears
    a = fp16_to_ext(16'h7000); b = fp16_to_ext(16'h0400);
    #1;
    check_fp();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
