// axbxp_control_tb: self-checking test of the operand control units.
// An activation-role and a weight-role control unit get random packs for
// every configuration of the built K in static and dynamic mode. The lanes are then
// multiplied pairwise exactly as a PE would, and the sum must equal
// sum_m A_m*W_m over the M = floor(N/L) packed elements, with A_m and W_m
// computed from sign and magnitude by the reference package. Lanes at and
// above M*L must be zero, and `valid` low must silence all lanes.
module axbxp_control_tb;
  import axbxp_pkg::*;
  import axbxp_ref_pkg::*;

  logic        valid;
  idx_mode_e   mode;
  tensor_cfg_t a_cfg, w_cfg;
  pack_t       a_pack, w_pack;
  lane_bus_t   a_lanes, w_lanes;
  int checks = 0, failures = 0;

  axbxp_control #(.IS_WEIGHT(1'b0)) u_a (.valid, .mode, .own(a_cfg), .nt_other(w_cfg.nt),
                                         .pack(a_pack), .lanes(a_lanes));
  axbxp_control #(.IS_WEIGHT(1'b1)) u_w (.valid, .mode, .own(w_cfg), .nt_other(a_cfg.nt),
                                         .pack(w_pack), .lanes(w_lanes));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int it = 0; it < 2000; it++) begin
      int nt_w, nt_a, m_cnt, ia, iw;
      longint expect_sum, got;
      bit dyn;
      cfg_table(it, nt_w, nt_a);
      dyn   = it[3];
      mode  = dyn ? MODE_DYNAMIC : MODE_STATIC;
      m_cnt = N / (nt_a * nt_w);
      ia = $urandom_range(nt_a - 1, N - 1);
      iw = $urandom_range(nt_w - 1, N - 1);
      a_cfg.nt = NT_W'(nt_a); a_cfg.i_top = IDX_W'(ia);
      w_cfg.nt = NT_W'(nt_w); w_cfg.i_top = IDX_W'(iw);
      a_pack = '0; w_pack = '0;
      expect_sum = 0;
      for (int m = 0; m < m_cnt; m++) begin
        bit sa = 1'($urandom), sw = 1'($urandom);
        int ma = rand_mag(), mw = rand_mag();
        int ta = dyn ? dyn_top(ma, nt_a) : ia;
        int tw = dyn ? dyn_top(mw, nt_w) : iw;
        put_elem(a_pack, m, sa, ma, nt_a, ta);
        put_elem(w_pack, m, sw, mw, nt_w, tw);
        expect_sum += longint'(approx_val(sa, ma, nt_a, ta)) * longint'(approx_val(sw, mw, nt_w, tw));
      end
      valid = 1'b1;
      #1;
      got = 0;
      for (int j = 0; j < int'(N); j++)
        got += longint'(a_lanes[j].blk) * longint'(w_lanes[j].blk)
               * (longint'(1) << (int'(a_lanes[j].sh) + int'(w_lanes[j].sh)));
      check(got == expect_sum, $sformatf("it %0d cfg(%0d,%0d) dyn=%0d: got %0d exp %0d",
                                         it, nt_w, nt_a, dyn, got, expect_sum));
      for (int j = m_cnt * nt_a * nt_w; j < int'(N); j++)
        check(a_lanes[j] == '0 && w_lanes[j] == '0, "unused lane not zero");
      valid = 1'b0;
      #1;
      check(a_lanes == '0 && w_lanes == '0, "valid low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
