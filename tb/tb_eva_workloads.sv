// tb_eva_workloads: runs the EVA core at its default sizes on full layers
// of the model shapes it is meant for, and checks every output against a
// real-number reference y[b][n] = sum_c sum_v O_c[b][v][I_c[v][n]],
// O_c = X_b B_c, plus the layer time against the epilogue/GEMM bound.
//  1. LLaMA-2-7B FFN down projection, one 4096-column chunk: K = 11008,
//     4-codebook AQLM (4 bits per weight), vertical tree. K/256 = 43 tiles
//     are padded with zero input rows to 44, a multiple of 4: zero rows give
//     zero output-codebook rows, so their (random) indices add nothing.
//  2. LLaMA-2-7B attention projection (K = N = 4096) for four requests
//     sharing every weight tile, 3 codebooks, diagonal accumulation, WI
//     delivered with random gaps.
//  3. Qwen3-30B-A3B expert down projection: K = 768 (3 tiles, padded to
//     4), N = 2048, 2 codebooks, diagonal.
// Layer shapes are the public configurations of these models.
module tb_eva_workloads;
  import eva_pkg::*;
  import tb_util_pkg::*;

  localparam int ROWS = 32, COLS = 8, NUM_EU = 4, WIW = NUM_EU * ROWS * 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_we; logic [10:0] x_waddr; logic [127:0] x_wdata;
  logic wc_we; logic [9:0] wc_waddr; logic [127:0] wc_wdata;
  logic wi_valid, wi_ready; logic [WIW-1:0] wi_data;
  logic start; logic [12:0] cfg_n; logic [11:0] cfg_tiles; logic [2:0] cfg_cb, cfg_batch; logic cfg_diag;
  logic busy, done;
  logic [11:0] out_addr; logic [1:0] out_lane; fp16_t out_data;
  logic pf_mode, pf_load, pf_valid;
  logic [31:0] pf_stat [COLS];
  logic [31:0] pf_strm [COLS];
  logic pf_out_valid [ROWS];
  logic [31:0] pf_out_int [ROWS];
  logic ev_wi_stall, ev_oc_full, ev_overlap;
  logic [11:0] wi_level;

  eva_top dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data of the current job
  logic [15:0] X  [4][11264];     // [request][k], zero padded
  logic [15:0] WC [4][256][8];    // [codebook][centroid][element]
  byte unsigned WI [];            // [c][v][n] flattened
  int  cur_n, cur_v, cur_cb, cur_b;
  int  wi_gap_pct;

  function automatic int wi_at(int c, int v, int n);
    return int'(WI[(c * cur_v + v) * cur_n + n]);
  endfunction

  task automatic write_buffers();
    for (int b = 0; b < cur_b; b++)
      for (int v = 0; v < cur_v; v++) begin
        @(negedge clk);
        x_we = 1; x_waddr = 11'(b * cur_v + v);
        for (int k = 0; k < 8; k++) x_wdata[16*k +: 16] = X[b][8*v + k];
      end
    for (int c = 0; c < cur_cb; c++)
      for (int j = 0; j < 256; j++) begin
        @(negedge clk);
        x_we = 0; wc_we = 1; wc_waddr = 10'(c * 256 + j);
        for (int k = 0; k < 8; k++) wc_wdata[16*k +: 16] = WC[c][j][k];
      end
    @(negedge clk); x_we = 0; wc_we = 0;
  endtask

  // streams the WI words of the job in (group, codebook, column) order
  task automatic drive_wi();
    int tpg, groups;
    tpg = NUM_EU / cur_b;
    groups = (cur_v / ROWS) / tpg;
    for (int g = 0; g < groups; g++)
      for (int c = 0; c < cur_cb; c++)
        for (int n = 0; n < cur_n; n++) begin
          for (int l = 0; l < NUM_EU; l++)
            for (int r = 0; r < ROWS; r++)
              wi_data[(l * ROWS + r) * 8 +: 8] = (l < tpg) ? 8'(wi_at(c, (g * tpg + l) * ROWS + r, n)) : 8'($urandom);
          while (int'($urandom_range(99)) < wi_gap_pct) begin
            wi_valid = 0;
            @(negedge clk);
          end
          wi_valid = 1;
          @(posedge clk);
          while (!wi_ready) @(posedge clk);
          @(negedge clk);
        end
    wi_valid = 0;
  endtask

  task automatic run_job(input int n, input int k_real, input int cb, input int batch, input bit diag,
                         input int gap, input bit check_time);
    int k;
    int t_start, t_end, bound, groups, gemm_pass, epi_pass;
    real O [][][];   // [c*cur_b+b][v][j]
    // pad K up to whole groups of tiles: 256 * (NUM_EU / batch) inputs
    k = ((k_real + 256 * (NUM_EU / batch) - 1) / (256 * (NUM_EU / batch))) * (256 * (NUM_EU / batch));
    cur_n = n; cur_v = k / 8; cur_cb = cb; cur_b = batch; wi_gap_pct = gap;
    for (int b = 0; b < batch; b++) for (int i = 0; i < k; i++) X[b][i] = (i < k_real) ? rand_h(11, 16) : 16'h0000;
    for (int c = 0; c < cb; c++) for (int j = 0; j < 256; j++) for (int e = 0; e < 8; e++) WC[c][j][e] = rand_h(8, 14);
    WI = new[cb * cur_v * n];
    foreach (WI[i]) WI[i] = 8'($urandom);
    write_buffers();
    // reference output codebooks
    O = new[cb * batch];
    for (int cbi = 0; cbi < cb * batch; cbi++) begin
      int c, b;
      c = cbi / batch; b = cbi % batch;
      O[cbi] = new[cur_v];
      for (int v = 0; v < cur_v; v++) begin
        O[cbi][v] = new[256];
        for (int j = 0; j < 256; j++) begin
          real s = 0.0;
          for (int e = 0; e < 8; e++) s += h2r(X[b][8*v + e]) * h2r(WC[c][j][e]);
          O[cbi][v][j] = s;
        end
      end
    end
    @(negedge clk);
    start = 1; cfg_n = 13'(n); cfg_tiles = 12'(cur_v / ROWS); cfg_cb = 3'(cb); cfg_batch = 3'(batch); cfg_diag = diag;
    @(negedge clk); start = 0;
    t_start = $time / 10;
    fork
      drive_wi();
      begin @(posedge done); t_end = $time / 10; end
    join
    @(negedge clk);
    // layer time: epilogue-bound
    groups = (cur_v / ROWS) / (NUM_EU / batch);
    // per pass (tile group x codebook): the epilogue needs N cycles, the
    // GEMM unit NUM_EU x (preload + 256 + drain); the slower one sets the pace
    gemm_pass = NUM_EU * (ROWS + 256 + ROWS + COLS + 6);
    epi_pass  = n + ROWS + 6;
    bound = groups * cb * ((gemm_pass > epi_pass) ? gemm_pass : epi_pass) + gemm_pass + 100;
    if (check_time) begin
      checks++;
      if (t_end - t_start > bound || t_end - t_start < groups * cb * n) begin
        failures++;
        $display("layer took %0d cycles, expected between %0d and %0d", t_end - t_start, groups * cb * n, bound);
      end
    end
    $display("layer N=%0d K=%0d (padded) C=%0d batch=%0d diag=%0d: %0d cycles (epilogue bound %0d)", n, k, cb, batch, diag, t_end - t_start, groups * cb * n);
    // outputs
    for (int b = 0; b < batch; b++)
      for (int j = 0; j < n; j++) begin
        real ref_v, mag;
        ref_v = 0.0; mag = 0.0;
        for (int c = 0; c < cb; c++)
          for (int v = 0; v < cur_v; v++) begin
            ref_v += O[c * batch + b][v][wi_at(c, v, j)];
            mag += absr(O[c * batch + b][v][wi_at(c, v, j)]);
          end
        out_addr = 12'(j); out_lane = 2'(b);
        @(negedge clk);
        checks++;
        if (!close(out_data, ref_v, pow2(-10), mag * pow2(-10))) begin
          failures++;
          if (failures < 10) $display("y[%0d][%0d] got %g want %g", b, j, h2r(out_data), ref_v);
        end
      end
  endtask

  initial begin
    x_we = 0; x_waddr = 0; x_wdata = 0; wc_we = 0; wc_waddr = 0; wc_wdata = 0;
    wi_valid = 0; wi_data = 0; start = 0; cfg_n = 0; cfg_tiles = 0; cfg_cb = 1; cfg_batch = 1; cfg_diag = 0;
    out_addr = 0; out_lane = 0; pf_mode = 0; pf_load = 0; pf_valid = 0;
    for (int c = 0; c < COLS; c++) begin pf_stat[c] = 0; pf_strm[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(4096, 11008, 4, 1, 1'b0, 0,  1'b1);
    run_job(4096, 4096,  3, 4, 1'b1, 30, 1'b0);
    run_job(2048, 768,   2, 1, 1'b1, 0,  1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
