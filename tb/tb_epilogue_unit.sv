// tb_epilogue_unit: one EU connected to a behavioural 32-bank OC memory
// (registered reads, as in the OC buffer). Streams 300 back-to-back random
// WI columns in vertical mode and 300 in diagonal mode and checks for each
// column the sum of the 32 looked-up entries (real reference), the tag,
// the order, the throughput of one column per cycle and the latency (2
// cycles vertical, 33 diagonal). Also checks that in diagonal mode row r
// reads its bank r cycles after the column is accepted.
module tb_epilogue_unit;
  import eva_pkg::*;
  import tb_util_pkg::*;
  localparam int ROWS = 32, IDX_W = 8, TAG_W = 14, NCOL = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic diag, in_valid, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [IDX_W-1:0] in_idx [ROWS];
  logic [IDX_W-1:0] oc_idx [ROWS];
  fp16_t oc_data [ROWS];
  ext_t out_sum;
  fp16_t OC [ROWS][256];
  logic [7:0] WI [NCOL][ROWS];
  int checks = 0, failures = 0;
  int cyc = 0, t_issue [NCOL], nout;

  epilogue_unit #(.ROWS(ROWS), .IDX_W(IDX_W), .TAG_W(TAG_W)) dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int r = 0; r < ROWS; r++) oc_data[r] <= OC[r][oc_idx[r]];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int j;
    real ref_v, mag;
    j = int'(out_tag);
    checks += 3;
    if (j != nout) begin failures++; if (failures < 10) $display("column %0d out of order (expected %0d)", j, nout); end
    if (cyc != t_issue[j] + (diag ? ROWS + 1 : 2)) begin
      failures++;
      if (failures < 10) $display("column %0d latency %0d", j, cyc - t_issue[j]);
    end
    ref_v = 0.0; mag = 0.0;
    for (int r = 0; r < ROWS; r++) begin ref_v += h2r(OC[r][WI[j][r]]); mag += absr(h2r(OC[r][WI[j][r]])); end
    if (absr(x2r(out_sum.e, out_sum.m) - ref_v) > mag * pow2(-18)) begin
      failures++;
      if (failures < 10) $display("column %0d sum %g want %g", j, x2r(out_sum.e, out_sum.m), ref_v);
    end
    nout++;
  end

  // in diagonal mode bank r must see the index of the column issued r cycles earlier
  always @(posedge clk) if (rst_n && diag) begin
    for (int r = 0; r < ROWS; r++) begin
      int j;
      j = -1;
      for (int k = 0; k < NCOL; k++) if (t_issue[k] == cyc - r) j = k;
      if (j >= 0) begin
        checks++;
        if (oc_idx[r] != WI[j][r]) failures++;
      end
    end
  end

  task automatic run(input bit d);
    diag = d; nout = 0;
    for (int j = 0; j < NCOL; j++) begin
      t_issue[j] = -1000;
      for (int r = 0; r < ROWS; r++) WI[j][r] = 8'($urandom);
    end
    for (int j = 0; j < NCOL; j++) begin
      @(negedge clk);
      in_valid = 1; in_tag = TAG_W'(j);
      for (int r = 0; r < ROWS; r++) in_idx[r] = WI[j][r];
      t_issue[j] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (ROWS + 5) @(negedge clk);
    checks++;
    if (nout != NCOL) begin failures++; $display("%0d of %0d columns came out", nout, NCOL); end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) for (int j = 0; j < 256; j++) OC[r][j] = rand_h(8, 20);
    diag = 0; in_valid = 0; in_tag = 0;
    for (int r = 0; r < ROWS; r++) in_idx[r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
