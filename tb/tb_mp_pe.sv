// tb_mp_pe: checks one mixed-precision PE. Loads a stationary value through
// the shift chain, streams operands and partial sums and checks, one cycle
// later, strm_out (pass-through), stat_out and psum_out = psum_in +
// product(s): exact for INT8 (four lanes), within rounding for FP16.
module tb_mp_pe;
  import eva_pkg::*;
  import tb_util_pkg::*;

  logic        clk = 0, rst_n = 0;
  pe_mode_e    mode;
  logic        load;
  logic [31:0] stat_in, stat_out, strm_in, strm_out;
  ext_t        psum_in, psum_out;
  int checks = 0, failures = 0;

  mp_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w;
    logic [31:0] s;
    ext_t        pin;
    mode = MODE_INT8; load = 0; stat_in = 0; strm_in = 0; psum_in = EXT_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      mode = (t < 200) ? MODE_INT8 : MODE_FP16;
      // load a stationary value
      w = (mode == MODE_INT8) ? $urandom : {16'h0, rand_h(8, 22)};
      @(negedge clk); load = 1; stat_in = w;
      @(negedge clk); load = 0;
      checks++;
      if (stat_out != w) failures++;
      // one streamed operand
      s   = (mode == MODE_INT8) ? $urandom : {16'h0, rand_h(8, 22)};
      pin = (mode == MODE_INT8) ? '{e: 8'd0, m: 32'($urandom_range(2000000)) - 32'sd1000000}
                                : fp16_to_ext(rand_h(10, 24));
      strm_in = s; psum_in = pin;
      @(negedge clk);
      checks += 2;
      if (strm_out != s) failures++;
      if (mode == MODE_INT8) begin
        int ref_v;
        ref_v = pin.m;
        for (int i = 0; i < 4; i++) ref_v += int'($signed(w[8*i +: 8])) * int'($signed(s[8*i +: 8]));
        if (psum_out.m != ref_v) begin
          failures++;
          if (failures < 10) $display("INT8 PE: got %0d want %0d", psum_out.m, ref_v);
        end
      end else begin
        real rp, ref_v;
        rp = h2r(w[15:0]) * h2r(s[15:0]);
        ref_v = x2r(pin.e, pin.m) + rp;
        if (absr(x2r(psum_out.e, psum_out.m) - ref_v) > (absr(rp) + absr(x2r(pin.e, pin.m))) * pow2(-20)) begin
          failures++;
          if (failures < 10) $display("FP16 PE: got %g want %g", x2r(psum_out.e, psum_out.m), ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
