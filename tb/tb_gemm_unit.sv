// tb_gemm_unit: checks the 32x8 GEMM unit at its full size in both modes.
// FP16 mode: loads a random 32x8 input tile (rows presented bottom row
// first), streams 256 random centroids back to back with the centroid
// number as tag and checks every one of the 32x256 OC entries against a
// real-number dot product rounded to FP16 (tolerance: FP16 rounding plus
// alignment truncation), and that row r of vector t appears exactly at
// cycle t + r + COLS + 1 (256 results per row in 256 consecutive cycles).
// INT8 mode: loads a random 32x32 INT8 weight tile and streams 64 random
// activation vectors; checks every INT32 row result exactly.
module tb_gemm_unit;
  import eva_pkg::*;
  import tb_util_pkg::*;

  localparam int ROWS = 32, COLS = 8, TAG_W = 16, NV = 256;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic load, strm_valid;
  logic [31:0] stat_in [COLS];
  logic [TAG_W-1:0] strm_tag;
  logic [31:0] strm_in [COLS];
  logic out_valid [ROWS];
  logic [TAG_W-1:0] out_tag [ROWS];
  fp16_t out_fp16 [ROWS];
  logic [31:0] out_int [ROWS];

  gemm_unit #(.ROWS(ROWS), .COLS(COLS), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] X [ROWS][COLS];
  logic [15:0] Bc [NV][COLS];
  logic [31:0] W [ROWS][COLS];
  logic [31:0] A [NV][COLS];
  int t0;
  int seen [ROWS];

  // result checker
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) if (out_valid[r]) begin
      int j;
      j = int'(out_tag[r]);
      seen[r]++;
      checks++;
      if (cyc != t0 + j + r + COLS + 1) begin
        failures++;
        if (failures < 10) $display("row %0d tag %0d at cycle %0d, expected %0d", r, j, cyc, t0 + j + r + COLS + 1);
      end
      checks++;
      if (mode == MODE_FP16) begin
        real ref_v, mag;
        ref_v = 0.0; mag = 0.0;
        for (int c = 0; c < COLS; c++) begin
          ref_v += h2r(X[r][c]) * h2r(Bc[j][c]);
          mag += absr(h2r(X[r][c]) * h2r(Bc[j][c]));
        end
        if (!close(out_fp16[r], ref_v, pow2(-10), mag * pow2(-18) + pow2(-24))) begin
          failures++;
          if (failures < 10) $display("FP16 row %0d entry %0d: got %g want %g", r, j, h2r(out_fp16[r]), ref_v);
        end
      end else begin
        int ref_i;
        ref_i = 0;
        for (int c = 0; c < COLS; c++)
          for (int i = 0; i < 4; i++)
            ref_i += int'($signed(W[r][c][8*i +: 8])) * int'($signed(A[j][c][8*i +: 8]));
        if (int'(out_int[r]) != ref_i) begin
          failures++;
          if (failures < 10) $display("INT8 row %0d vec %0d: got %0d want %0d", r, j, $signed(out_int[r]), ref_i);
        end
      end
    end
  end

  task automatic run(input pe_mode_e m, input int nvec);
    mode = m;
    for (int r = 0; r < ROWS; r++) seen[r] = 0;
    // preload: bottom row first
    for (int k = ROWS - 1; k >= 0; k--) begin
      @(negedge clk);
      load = 1;
      for (int c = 0; c < COLS; c++) stat_in[c] = (m == MODE_FP16) ? {16'h0, X[k][c]} : W[k][c];
    end
    @(negedge clk); load = 0;
    t0 = cyc;
    for (int j = 0; j < nvec; j++) begin
      strm_valid = 1; strm_tag = TAG_W'(j);
      for (int c = 0; c < COLS; c++) strm_in[c] = (m == MODE_FP16) ? {16'($urandom), Bc[j][c]} : A[j][c];
      @(negedge clk);
    end
    strm_valid = 0;
    repeat (ROWS + COLS + 4) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (seen[r] != nvec) begin
        failures++;
        $display("row %0d produced %0d results, expected %0d", r, seen[r], nvec);
      end
    end
  endtask

  initial begin
    load = 0; strm_valid = 0; strm_tag = 0; mode = MODE_FP16;
    for (int c = 0; c < COLS; c++) begin stat_in[c] = 0; strm_in[c] = 0; end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      X[r][c] = rand_h(10, 18);
      W[r][c] = $urandom;
    end
    for (int j = 0; j < NV; j++) for (int c = 0; c < COLS; c++) begin
      Bc[j][c] = rand_h(9, 17);
      A[j][c] = $urandom;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_FP16, NV);
    run(MODE_INT8, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
