// tb_input_buffer: fills the whole input_buffer with random 128-bit rows, reads every row
// back in random order and checks the data and the one-cycle read latency;
// then checks that a read and a write to the same row in one cycle return
// the old row.
module tb_input_buffer;
  localparam int DEPTH = 2048;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [10:0] waddr, raddr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [DEPTH];
  int checks = 0, failures = 0;

  input_buffer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < DEPTH; t++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      raddr = 11'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("row %0d: got %h want %h", a, rdata, model[a]);
      end
    end
    // read-during-write returns the old contents
    raddr = 5; we = 1; waddr = 5; wdata = ~model[5];
    @(negedge clk); we = 0;
    checks++;
    if (rdata !== model[5]) failures++;
    @(negedge clk);
    checks++;
    if (rdata !== ~model[5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
