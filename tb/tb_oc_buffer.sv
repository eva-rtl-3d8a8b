// tb_oc_buffer: fills every bank, slot and entry of the OC buffer (all 32
// banks written in the same cycle, each at a different EU/slot/entry), then
// in every cycle reads one entry from every bank of every EU (random slot
// per EU, random index per bank, including all banks on the same index)
// and checks all 128 values one cycle later: 32 lookups per EU per cycle
// with no conflicts.
module tb_oc_buffer;
  import eva_pkg::*;
  localparam int NUM_EU = 4, ROWS = 32, ENTRIES = 256, SLOTS = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic       wr_en   [ROWS];
  logic [1:0] wr_eu   [ROWS];
  logic [1:0] wr_slot [ROWS];
  logic [7:0] wr_idx  [ROWS];
  fp16_t      wr_data [ROWS];
  logic [1:0] rd_slot [NUM_EU];
  logic [7:0] rd_idx  [NUM_EU][ROWS];
  fp16_t      rd_data [NUM_EU][ROWS];
  int checks = 0, failures = 0;

  oc_buffer #(.NUM_EU(NUM_EU), .ROWS(ROWS), .ENTRIES(ENTRIES), .SLOTS(SLOTS)) dut (.*);

  function automatic fp16_t pat(int e, int s, int r, int j);
    return 16'((e * 7 + s * 13 + r * 131 + j * 977) ^ (j << 5) ^ (r << 11));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int es [NUM_EU];
    for (int r = 0; r < ROWS; r++) begin wr_en[r] = 0; wr_eu[r] = 0; wr_slot[r] = 0; wr_idx[r] = 0; wr_data[r] = 0; end
    for (int e = 0; e < NUM_EU; e++) begin rd_slot[e] = 0; for (int r = 0; r < ROWS; r++) rd_idx[e][r] = 0; end
    // fill: in cycle k bank r writes item (k + r) mod total
    for (int k = 0; k < NUM_EU * SLOTS * ENTRIES; k++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        int it, e, s, j;
        it = (k + r * 97) % (NUM_EU * SLOTS * ENTRIES);
        e = it / (SLOTS * ENTRIES); s = (it / ENTRIES) % SLOTS; j = it % ENTRIES;
        wr_en[r] = 1; wr_eu[r] = 2'(e); wr_slot[r] = 2'(s); wr_idx[r] = 8'(j); wr_data[r] = pat(e, s, r, j);
      end
    end
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) wr_en[r] = 0;
    for (int t = 0; t < 500; t++) begin
      int ix [NUM_EU][ROWS];
      for (int e = 0; e < NUM_EU; e++) begin
        es[e] = int'($urandom_range(SLOTS - 1));
        rd_slot[e] = 2'(es[e]);
        for (int r = 0; r < ROWS; r++) begin
          ix[e][r] = (t % 5 == 0) ? (t % ENTRIES) : int'($urandom_range(ENTRIES - 1));
          rd_idx[e][r] = 8'(ix[e][r]);
        end
      end
      @(negedge clk);
      for (int e = 0; e < NUM_EU; e++)
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (rd_data[e][r] !== pat(e, es[e], r, ix[e][r])) begin
            failures++;
            if (failures < 10) $display("eu %0d slot %0d bank %0d idx %0d: got %h", e, es[e], r, ix[e][r], rd_data[e][r]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
