// axbxp_pe_tb: self-checking test of one Ax-BxP PE.
// Drives random signed blocks and shift amounts on all N lanes for several
// accumulation runs, and checks the accumulator against an integer sum of
// a*w*2^(s_a+s_w), the one-cycle forwarding of both lane buses and clear.
module axbxp_pe_tb;
  import axbxp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  lane_bus_t a_in, w_in, a_out, w_out;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axbxp_pe dut (.clk, .rst_n, .clear, .a_in, .w_in, .a_out, .w_out, .acc);

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
    longint expect_acc;
    lane_bus_t a_prev, w_prev;
    a_in = '0; w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int run = 0; run < 40; run++) begin
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      check(acc == 0, "clear");
      expect_acc = 0;
      for (int t = 0; t < 20; t++) begin
        for (int j = 0; j < int'(N); j++) begin
          int av = $urandom_range(0, (1 << (K+1)) - 1) - (1 << K);
          int wv = $urandom_range(0, (1 << (K+1)) - 1) - (1 << K);
          int sa = $urandom_range(0, (N-1)*K);
          int sw = $urandom_range(0, (N-1)*K);
          if (run % 4 == 0 && j > 0) begin av = 0; wv = 0; end
          a_in[j].blk = (K+1)'(av); a_in[j].sh = SH_W'(sa);
          w_in[j].blk = (K+1)'(wv); w_in[j].sh = SH_W'(sw);
          expect_acc += longint'(av) * longint'(wv) * (longint'(1) << (sa + sw));
        end
        a_prev = a_in; w_prev = w_in;
        @(negedge clk);
        check(acc == ACC_W'(expect_acc), $sformatf("acc run %0d step %0d: got %0d exp %0d", run, t, acc, expect_acc));
        check(a_out == a_prev && w_out == w_prev, "forwarding");
      end
      a_in = '0; w_in = '0;
      @(negedge clk);
      check(acc == ACC_W'(expect_acc), "hold with idle lanes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
