// tb_mp_mul: checks the reconfigurable multiplier. INT8 mode: four random
// signed byte products against integer multiplication. FP16 mode: random
// FP16 pairs against the exact real product (22-bit significand products
// are exact in the extended format), plus zero operands and the sign rule.
module tb_mp_mul;
  import eva_pkg::*;
  import tb_util_pkg::*;

  pe_mode_e           mode;
  logic        [31:0] a, b;
  logic signed [17:0] int_prod [4];
  ext_t               fp_prod;
  int checks = 0, failures = 0;

  mp_mul dut (.mode(mode), .a(a), .b(b), .int_prod(int_prod), .fp_prod(fp_prod));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MODE_INT8;
    for (int t = 0; t < 300; t++) begin
      a = $urandom; b = $urandom;
      if (t == 0) begin a = 32'h80808080; b = 32'h807F8001; end
      #1;
      for (int i = 0; i < 4; i++) begin
        int ref_p;
        ref_p = int'($signed(a[8*i +: 8])) * int'($signed(b[8*i +: 8]));
        checks++;
        if (int'(int_prod[i]) != ref_p) begin
          failures++;
          if (failures < 10) $display("INT8 lane %0d: %0d * %0d got %0d", i, $signed(a[8*i +: 8]), $signed(b[8*i +: 8]), int_prod[i]);
        end
      end
    end
    mode = MODE_FP16;
    for (int t = 0; t < 500; t++) begin
      a = {16'($urandom), rand_h(1, 30)};
      b = {16'($urandom), rand_h(1, 30)};
      if (t == 1) a[14:10] = 5'd0;              // zero operand
      #1;
      checks++;
      if (x2r(fp_prod.e, fp_prod.m) != h2r(a[15:0]) * h2r(b[15:0])) begin
        failures++;
        if (failures < 10) $display("FP16 %h * %h: got %g want %g", a[15:0], b[15:0], x2r(fp_prod.e, fp_prod.m), h2r(a[15:0]) * h2r(b[15:0]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
