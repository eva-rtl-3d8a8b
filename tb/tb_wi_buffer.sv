// tb_wi_buffer: drives the WI FIFO with random valid/ready patterns at a
// reduced depth (16) so that it fills and empties many times, and checks
// that every word comes out once, in order, that in_ready drops exactly
// when DEPTH words are held and out_valid exactly when none are, and the
// occupancy count.
module tb_wi_buffer;
  localparam int DEPTH = 16, LANES = 4, ROWS = 32, IDX_W = 8, W = LANES * ROWS * IDX_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [4:0] count;
  int checks = 0, failures = 0;
  int n_full = 0, n_empty = 0;

  wi_buffer #(.DEPTH(DEPTH), .LANES(LANES), .ROWS(ROWS), .IDX_W(IDX_W)) dut (.*);

  function automatic logic [W-1:0] word(input int k);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[32*i +: 32] = 32'(k * 7919 + i * 104729);
    return w;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0, rcvd = 0, model_cnt = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (rcvd < 3000) begin
      // phases: fill-biased, drain-biased
      int pin, pout;
      pin  = ((rcvd / 500) % 2 == 0) ? 80 : 30;
      pout = ((rcvd / 500) % 2 == 0) ? 30 : 80;
      in_valid  = (int'($urandom_range(99)) < pin);
      in_data   = word(sent);
      out_ready = (int'($urandom_range(99)) < pout);
      #1;
      checks += 3;
      if (int'(count) != model_cnt) begin failures++; $display("count %0d want %0d", count, model_cnt); end
      if (in_ready != (model_cnt < DEPTH)) failures++;
      if (out_valid != (model_cnt > 0)) failures++;
      if (model_cnt == DEPTH) n_full++;
      if (model_cnt == 0) n_empty++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== word(rcvd)) begin
          failures++;
          if (failures < 10) $display("word %0d wrong", rcvd);
        end
      end
      // the next clock edge commits this cycle's handshakes
      if (in_valid && in_ready) begin sent++; model_cnt++; end
      if (out_valid && out_ready) begin rcvd++; model_cnt--; end
      @(posedge clk);
      @(negedge clk);
    end
    checks += 2;
    if (n_full == 0) begin failures++; $display("never full"); end
    if (n_empty == 0) begin failures++; $display("never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
