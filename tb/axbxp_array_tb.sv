// axbxp_array_tb: self-checking test of the Ax-BxP systolic array.
// A 4x3 array (reduced from 32x32 to keep the run short) computes
// C[r][c] = sum_k A[r][k]*W[k][c] over approximated operands for every
// configuration in static and dynamic mode. Packs are built from random
// sign/magnitude operands; the reference products use the reference
// package. It checks every accumulator, and that the last PE holds its final
// value exactly ROWS+COLS-1 cycles after the last input and not earlier.
module axbxp_array_tb;
  import axbxp_pkg::*;
  import axbxp_ref_pkg::*;

  localparam int ROWS = 4;
  localparam int COLS = 3;
  localparam int T    = 6;     // input cycles per run

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  layer_cfg_t cfg;
  pack_t a_pack [ROWS];
  pack_t w_pack [COLS];
  logic signed [ACC_W-1:0] acc [ROWS][COLS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axbxp_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .clear, .in_valid, .cfg,
                                               .a_pack, .w_pack, .acc);

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
    cfg = '0;
    for (int r = 0; r < ROWS; r++) a_pack[r] = '0;
    for (int c = 0; c < COLS; c++) w_pack[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 40; run++) begin
      int nt_w, nt_a, m_cnt, ia, iw;
      bit dyn;
      longint expect_c [ROWS][COLS];
      longint last_step;
      cfg_table(run, nt_w, nt_a);
      dyn   = run[0] ^ run[3];
      m_cnt = N / (nt_a * nt_w);
      ia = $urandom_range(nt_a - 1, N - 1);
      iw = $urandom_range(nt_w - 1, N - 1);
      cfg = '0;
      cfg.mode = dyn ? MODE_DYNAMIC : MODE_STATIC;
      cfg.a.nt = NT_W'(nt_a); cfg.a.i_top = IDX_W'(ia);
      cfg.w.nt = NT_W'(nt_w); cfg.w.i_top = IDX_W'(iw);
      foreach (expect_c[r, c]) expect_c[r][c] = 0;

      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      for (int t = 0; t < T; t++) begin
        int av [ROWS][N];
        int wv [COLS][N];
        for (int r = 0; r < ROWS; r++) begin
          a_pack[r] = '0;
          for (int m = 0; m < m_cnt; m++) begin
            bit s = 1'($urandom); int mg = rand_mag();
            int tp = dyn ? dyn_top(mg, nt_a) : ia;
            put_elem(a_pack[r], m, s, mg, nt_a, tp);
            av[r][m] = approx_val(s, mg, nt_a, tp);
          end
        end
        for (int c = 0; c < COLS; c++) begin
          w_pack[c] = '0;
          for (int m = 0; m < m_cnt; m++) begin
            bit s = 1'($urandom); int mg = rand_mag();
            int tp = dyn ? dyn_top(mg, nt_w) : iw;
            put_elem(w_pack[c], m, s, mg, nt_w, tp);
            wv[c][m] = approx_val(s, mg, nt_w, tp);
          end
        end
        last_step = 0;
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            for (int m = 0; m < m_cnt; m++) begin
              expect_c[r][c] += longint'(av[r][m]) * longint'(wv[c][m]);
              if (r == ROWS - 1 && c == COLS - 1)
                last_step += longint'(av[r][m]) * longint'(wv[c][m]);
            end
        in_valid = 1'b1;
        @(negedge clk);
      end
      in_valid = 1'b0;
      for (int r = 0; r < ROWS; r++) a_pack[r] = '0;
      for (int c = 0; c < COLS; c++) w_pack[c] = '0;
      // the last input was taken at the previous rising edge; PE(R-1,C-1)
      // adds it ROWS+COLS-2 edges later, so one edge before that its
      // accumulator must still lack the last contribution.
      repeat (ROWS + COLS - 3) @(negedge clk);
      if (last_step != 0)
        check(acc[ROWS-1][COLS-1] == ACC_W'(expect_c[ROWS-1][COLS-1] - last_step),
              "last PE must not hold its final value before ROWS+COLS-1 cycles");
      @(negedge clk);
      foreach (acc[r, c])
        check(acc[r][c] == ACC_W'(expect_c[r][c]),
              $sformatf("run %0d cfg(%0d,%0d) dyn=%0d acc[%0d][%0d]=%0d exp %0d",
                        run, nt_w, nt_a, dyn, r, c, acc[r][c], expect_c[r][c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
