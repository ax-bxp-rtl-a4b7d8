// scratchpad_tb: self-checking test of the scratchpad (reduced to 64 words).
// Writes random words, reads them back on both ports, checks the one-cycle
// read latency, that a disabled port holds its data, and that a read of a
// word being written returns the old contents.
module scratchpad_tb;
  localparam int WORD_W = 40;
  localparam int DEPTH  = 64;

  logic clk = 1'b0;
  logic re_a = 0, re_b = 0, we = 0;
  logic [5:0] addr_a = 0, addr_b = 0, waddr = 0;
  logic [WORD_W-1:0] rdata_a, rdata_b, wdata = 0;
  logic [WORD_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  scratchpad #(.WORD_W(WORD_W), .BYTES(DEPTH * WORD_W / 8)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      we = 1; waddr = 6'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 500; i++) begin
      int a = $urandom_range(0, DEPTH-1), b = $urandom_range(0, DEPTH-1);
      logic [WORD_W-1:0] held_b;
      re_a = 1; addr_a = 6'(a);
      re_b = (i % 3 != 0); addr_b = 6'(b);
      held_b = rdata_b;
      // write a random word in the same cycle, sometimes to the word read
      we = (i % 2 == 0); waddr = (i % 4 == 0) ? 6'(a) : 6'($urandom_range(0, DEPTH-1));
      wdata = {$urandom, $urandom};
      @(negedge clk);
      check(rdata_a == model[a], $sformatf("port a word %0d", a));
      if (re_b) check(rdata_b == model[b], $sformatf("port b word %0d", b));
      else      check(rdata_b == held_b, "port b held");
      if (we) model[waddr] = wdata;
      we = 0; re_a = 0; re_b = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
