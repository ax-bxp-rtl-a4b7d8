// toaxbxp_tb: self-checking test of the ToAx-BxP output converter.
// Random accumulator values (signed, wide range), shifts, NT and modes. The
// expected element is computed from integers: magnitude after shift and
// saturation, top index from repeated division (dynamic) or the broadcast
// index (static), kept blocks by modular arithmetic. The pack is decoded and
// compared, together with the stored index and the saturation flag.
module toaxbxp_tb;
  import axbxp_pkg::*;
  import axbxp_ref_pkg::*;

  logic signed [ACC_W-1:0] acc;
  idx_mode_e   mode;
  tensor_cfg_t cfg;
  logic [4:0]  out_shift;
  pack_t       elem;
  logic        saturated;
  int checks = 0, failures = 0;

  toaxbxp dut (.acc, .mode, .cfg, .out_shift, .elem, .saturated);

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
    int n_sat = 0, n_clamp = 0;
    for (int it = 0; it < 3000; it++) begin
      longint v, mag;
      int nt, top, sh, exp_val, got_val;
      bit dyn, exp_sat, neg;
      case (it % 4)
        0: v = longint'($urandom_range(0, 255)) - 128;
        1: v = longint'($urandom_range(0, 4095)) - 2048;
        2: v = longint'($signed($urandom()));
        default: v = longint'($urandom_range(0, 15)) - 8;
      endcase
      nt  = $urandom_range(1, N);
      dyn = 1'($urandom);
      sh  = (it % 4 == 2) ? $urandom_range(0, 31) : $urandom_range(0, 3);
      neg = v < 0;
      mag = (neg ? -v : v) >>> sh;
      exp_sat = mag > (1 << MAG_W) - 1;
      if (exp_sat) mag = (1 << MAG_W) - 1;
      top = dyn ? dyn_top(int'(mag), nt) : $urandom_range(nt - 1, N - 1);
      exp_val = approx_val(neg && mag != 0, int'(mag), nt, top);

      acc = ACC_W'(v); mode = dyn ? MODE_DYNAMIC : MODE_STATIC;
      cfg.nt = NT_W'(nt); cfg.i_top = IDX_W'(top); out_shift = 5'(sh);
      #1;
      got_val = get_elem(elem, 0, nt, dyn, top);
      check(got_val == exp_val, $sformatf("it %0d v=%0d sh=%0d nt=%0d dyn=%0d: got %0d exp %0d",
                                          it, v, sh, nt, dyn, got_val, exp_val));
      check(saturated == exp_sat, "saturation flag");
      if (dyn) check(int'(elem.idx[0]) == top - nt + 1, "stored index");
      check(elem.sign[0] == (neg && mag != 0), "sign");
      if (exp_sat) n_sat++;
      if (dyn && top == nt - 1 && mag >= RADIX) n_clamp++;
    end
    check(n_sat > 0, "saturation never exercised");
    $display("saturated=%0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
