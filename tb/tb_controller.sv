// tb_controller: runs the controller alone (N_MAX = 64) for three layers
// and checks its schedule against one computed here from the tiling rules:
//  * GEMM jobs come in (group, codebook, EU) order; each preloads the 32
//    input rows of its tile/request, highest row first, then streams the
//    256 centroids of its codebook with tag {EU, slot, centroid}, the slot
//    advancing by one per job of that EU modulo 3 (the ring carries over
//    from one layer to the next);
//  * every epilogue pass issues columns 0..N-1, only after all four GEMM
//    jobs of that pass have drained, reads the next slot of the ring, flags only the
//    first pass as first, and maps EU e to WI lane e / batch;
//  * done pulses exactly once per layer, after the last pass.
// WI availability is random, so the consumer stalls.
module tb_controller;
  import eva_pkg::*;
  localparam int NUM_EU = 4, ROWS = 32, COLS = 8, ENTRIES = 256, SLOTS = 3, N_MAX = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, cfg_diag;
  logic [6:0] cfg_n;
  logic [11:0] cfg_tiles;
  logic [2:0] cfg_cb, cfg_batch;
  logic [10:0] x_raddr;
  logic [9:0] wc_raddr;
  logic g_load, g_strm_valid;
  logic [11:0] g_strm_tag;
  logic wi_valid, wi_ready, eu_valid, eu_first, eu_diag;
  logic [6:0] eu_col;
  logic [1:0] eu_slot [NUM_EU];
  logic [1:0] eu_lane [NUM_EU];
  logic [3:0] out_mask;
  logic ev_wi_stall, ev_oc_full, ev_overlap;
  int checks = 0, failures = 0;

  controller #(.NUM_EU(NUM_EU), .ROWS(ROWS), .COLS(COLS), .ENTRIES(ENTRIES), .SLOTS(SLOTS), .N_MAX(N_MAX)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("%s", msg);
  endtask

  int L_n, L_tiles, L_cb, L_b;
  // monitor state
  int cyc = 0;
  logic [10:0] xr_d;
  logic [9:0]  wr_d;
  int job, load_i, strm_i, pass, col_i, ndone;
  int job_end [$];          // cycle each GEMM job finished streaming
  int eu_jobs [NUM_EU];
  int stalls;
  int slot0 [NUM_EU];      // slot ring position at the start of a layer

  always @(posedge clk) begin
    cyc <= cyc + 1;
    xr_d <= x_raddr;
    wr_d <= wc_raddr;
    wi_valid <= ($urandom_range(99) < 70);
  end

  // expected job parameters
  function automatic void job_params(input int j, output int e, output int c, output int base);
    int g, tpg, bsh, req, tile;
    tpg = NUM_EU / L_b;
    e = j % NUM_EU; c = (j / NUM_EU) % L_cb; g = j / (NUM_EU * L_cb);
    req = e % L_b; tile = g * tpg + e / L_b;
    base = req * L_tiles * ROWS + tile * ROWS;
  endfunction

  always @(negedge clk) if (rst_n) begin
    int e, c, base;
    if (g_load) begin
      job_params(job, e, c, base);
      checks++;
      if (int'(xr_d) != base + ROWS - 1 - load_i) fail($sformatf("job %0d load %0d: addr %0d want %0d", job, load_i, xr_d, base + ROWS - 1 - load_i));
      load_i++;
    end
    if (g_strm_valid) begin
      job_params(job, e, c, base);
      checks += 2;
      if (int'(wr_d) != c * ENTRIES + strm_i) fail($sformatf("job %0d centroid addr %0d", job, wr_d));
      if (g_strm_tag != {2'(e), 2'(eu_jobs[e] % SLOTS), 8'(strm_i)}) fail($sformatf("job %0d i=%0d tag %h e=%0d jobs=%0d ws=%0d pst=%0d cyc=%0d", job, strm_i, g_strm_tag, e, eu_jobs[e], dut.wslot[0], dut.p_st, cyc));
      strm_i++;
      if (strm_i == ENTRIES) begin
        checks++;
        if (load_i != ROWS) fail("wrong preload length");
        job_end.push_back(cyc);
        eu_jobs[e]++;
        job++; load_i = 0; strm_i = 0;
      end
    end
    if (ev_wi_stall) stalls++;
    if (eu_valid) begin
      checks += 4;
      if (int'(eu_col) != col_i) fail($sformatf("pass %0d column %0d want %0d", pass, eu_col, col_i));
      if (eu_first != (pass == 0)) fail("first flag wrong");
      for (int k = 0; k < NUM_EU; k++) begin
        if (int'(eu_slot[k]) != (slot0[k] + pass) % SLOTS) fail("slot wrong");
        if (int'(eu_lane[k]) != k / L_b) fail("lane wrong");
      end
      if (col_i == 0) begin
        // all four jobs of this pass must have drained
        checks++;
        if (job_end.size() < NUM_EU * (pass + 1) || cyc - job_end[NUM_EU * (pass + 1) - 1] < ROWS + COLS)
          fail($sformatf("pass %0d started before its GEMM jobs finished", pass));
      end
      col_i++;
      if (col_i == L_n) begin col_i = 0; pass++; end
    end
    if (done) ndone++;
  end

  task automatic layer(input int n, input int tiles, input int cb, input int b);
    int groups;
    L_n = n; L_tiles = tiles; L_cb = cb; L_b = b;
    job = 0; load_i = 0; strm_i = 0; pass = 0; col_i = 0; ndone = 0;
    job_end.delete();
    for (int e = 0; e < NUM_EU; e++) slot0[e] = eu_jobs[e] % SLOTS;
    @(negedge clk);
    start = 1; cfg_n = 7'(n); cfg_tiles = 12'(tiles); cfg_cb = 3'(cb); cfg_batch = 3'(b); cfg_diag = (cb == 3);
    @(negedge clk); start = 0;
    checks++;
    if (!busy) fail("busy not set");
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    groups = tiles / (NUM_EU / b);
    checks += 5;
    if (job != groups * cb * NUM_EU) fail($sformatf("%0d GEMM jobs, want %0d", job, groups * cb * NUM_EU));
    if (pass != groups * cb) fail($sformatf("%0d passes, want %0d", pass, groups * cb));
    if (ndone != 1) fail("done count");
    if (busy) fail("still busy");
    if (eu_diag != (cb == 3)) fail("diag flag");
    for (int e = 0; e < NUM_EU; e++) begin
      checks++;
      if (out_mask[e] != (e < b)) fail("output mask");
    end
  endtask

  initial begin
    for (int e = 0; e < NUM_EU; e++) eu_jobs[e] = 0;
    start = 0; cfg_n = 0; cfg_tiles = 0; cfg_cb = 1; cfg_batch = 1; cfg_diag = 0; stalls = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer(64, 8, 2, 1);
    layer(40, 4, 3, 2);
    layer(64, 2, 1, 4);
    checks++;
    if (stalls == 0) fail("no WI stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
