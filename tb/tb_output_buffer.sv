// tb_output_buffer: accumulates five passes of random addends into a
// 64-entry, 4-lane output buffer (first pass overwrites, random lane masks
// on later passes, back-to-back addresses) and reads every entry back as
// FP16, comparing with real-number sums.
module tb_output_buffer;
  import eva_pkg::*;
  import tb_util_pkg::*;
  localparam int N_MAX = 64, LANES = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_valid, acc_first;
  logic [5:0] acc_addr, rd_addr;
  logic [3:0] acc_mask;
  ext_t acc_val [LANES];
  logic [1:0] rd_lane;
  fp16_t rd_data;
  real model [LANES][N_MAX];
  real mag   [LANES][N_MAX];
  int checks = 0, failures = 0;

  output_buffer #(.N_MAX(N_MAX), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_valid = 0; acc_first = 0; acc_addr = 0; acc_mask = 0; rd_addr = 0; rd_lane = 0;
    for (int l = 0; l < LANES; l++) acc_val[l] = EXT_ZERO;
    for (int p = 0; p < 5; p++) begin
      logic [3:0] m;
      m = (p == 0) ? 4'hF : 4'($urandom);
      for (int n = 0; n < N_MAX; n++) begin
        @(negedge clk);
        acc_valid = 1; acc_first = (p == 0); acc_addr = 6'(n); acc_mask = m;
        for (int l = 0; l < LANES; l++) begin
          fp16_t h;
          h = rand_h(10, 20);
          acc_val[l] = fp16_to_ext(h);
          if (m[l]) begin
            model[l][n] = (p == 0) ? h2r(h) : model[l][n] + h2r(h);
            mag[l][n]   = (p == 0) ? absr(h2r(h)) : mag[l][n] + absr(h2r(h));
          end
        end
      end
    end
    @(negedge clk); acc_valid = 0;
    for (int l = 0; l < LANES; l++)
      for (int n = 0; n < N_MAX; n++) begin
        rd_addr = 6'(n); rd_lane = 2'(l);
        @(negedge clk);
        checks++;
        if (!close(rd_data, model[l][n], pow2(-10), mag[l][n] * pow2(-18))) begin
          failures++;
          if (failures < 10) $display("lane %0d entry %0d: got %g want %g", l, n, h2r(rd_data), model[l][n]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
