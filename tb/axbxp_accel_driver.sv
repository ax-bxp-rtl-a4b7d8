// axbxp_accel_driver: stimulus and checker for the whole accelerator.
//
// Runs N_TILES output tiles on an axbxp_accel instance connected to its
// ports. For each tile it picks an Ax-BxP configuration (cycling through all
// configurations of the built K, static and dynamic mode), draws random sign/magnitude
// operands, writes T_STEPS activation words and T_STEPS weight words through
// the load port, starts the tile, measures start-to-done cycles (expected
// T_STEPS + 2*ROWS + COLS), reads the ROWS output words back and compares
// every output element with the reference: exact products of the
// approximated operands, summed, then shifted, saturated and cut to NT_O
// blocks by the reference package. It also compares sat_count.
//
// Mechanisms counted (each must occur at least once): static mode, dynamic
// mode, each configuration of the built K, several MACs per PE per cycle,
// output saturation, a dynamic index below the top block, and a tile whose
// output words are used again as activations of the next tile.
//
// With WORKLOAD set, tile i instead takes its configuration and its number
// of words from layer_table (layer-shaped tiles of the three networks, K=2
// configurations, dynamic mode, up to T_STEPS words), the output NT is
// random and tiles are not chained; only the multi-MAC and dynamic-mode
// counts are required then.
module axbxp_accel_driver
  import axbxp_pkg::*;
  import axbxp_ref_pkg::*;
#(
  parameter int ROWS    = 4,
  parameter int COLS    = 3,
  parameter int WORD_W  = 80,
  parameter int ADDR_W  = 7,
  parameter int N_TILES = 10,
  parameter int T_STEPS = 4,       // words per operand per tile (maximum in workload mode)
  parameter bit WORKLOAD = 1'b0,   // run the layer table below instead of cycling configurations
  parameter int WATCHDOG_CYCLES = 200000
)(
  input  logic              clk,
  output logic              rst_n,
  output logic              host_we,
  output logic [ADDR_W-1:0] host_waddr,
  output logic [WORD_W-1:0] host_wdata,
  output logic              host_re,
  output logic [ADDR_W-1:0] host_raddr,
  input  logic [WORD_W-1:0] host_rdata,
  output layer_cfg_t        cfg,
  output logic [ADDR_W-1:0] a_base,
  output logic [ADDR_W-1:0] w_base,
  output logic [ADDR_W-1:0] o_base,
  output logic [15:0]       n_steps,
  output logic              start,
  input  logic              busy,
  input  logic              done,
  input  logic [15:0]       sat_count
);

  int checks = 0, failures = 0;
  int n_static = 0, n_dynamic = 0, n_multi = 0, n_sat = 0, n_lowidx = 0, n_chain = 0;
  int n_cfg [5] = '{default: 0};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(int addr, logic [WORD_W-1:0] data);
    host_we = 1'b1; host_waddr = ADDR_W'(addr); host_wdata = data;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic read_word(int addr, output logic [WORD_W-1:0] data);
    host_re = 1'b1; host_raddr = ADDR_W'(addr);
    @(negedge clk);
    host_re = 1'b0;
    data = host_rdata;
  endtask

  // signed value of every activation/weight element, per step and pack slot
  int av [T_STEPS][ROWS][N];
  int wv [T_STEPS][COLS][N];
  longint cexp [ROWS][COLS];
  logic [WORD_W-1:0] prev_out [ROWS];
  int prev_nt = 0;

  task automatic run_test();
    rst_n = 1'b0; host_we = 0; host_re = 0; start = 0;
    host_waddr = '0; host_wdata = '0; host_raddr = '0;
    cfg = '0; a_base = '0; w_base = '0; o_base = '0; n_steps = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int tile = 0; tile < N_TILES; tile++) begin
      int nt_w, nt_a, nt_o, m_cnt, ia, iw, io, sh, cycles, exp_sat, ci, ts;
      bit dyn, chain;
      logic [WORD_W-1:0] word;
      ci = tile % n_cfgs();
      cfg_table(ci, nt_w, nt_a);
      dyn   = (tile / n_cfgs()) % 2 == 0;
      ts    = T_STEPS;
      if (WORKLOAD) begin
        layer_table(tile, nt_w, nt_a, ts);
        dyn = 1'b1;
      end
      m_cnt = N / (nt_a * nt_w);
      ia = dyn ? N - 1 : $urandom_range(nt_a - 1, N - 1);
      iw = dyn ? N - 1 : $urandom_range(nt_w - 1, N - 1);
      // output NT = activation NT of the next tile, so outputs can be reused
      begin
        int nw_next, na_next;
        cfg_table(tile + 1, nw_next, na_next);
        nt_o = WORKLOAD ? $urandom_range(1, N) : na_next;
      end
      io = $urandom_range(nt_o - 1, N - 1);
      // layer-length sums need a larger output shift to land in range
      sh = WORKLOAD ? $urandom_range(8, 14) : $urandom_range(0, 6);
      // reuse the previous tile's output words as activations when the
      // layout allows it: one element per pack, dynamic mode, same NT
      chain = !WORKLOAD && (tile > 0) && dyn && (m_cnt == 1) && (ROWS == COLS);

      cfg = '0;
      cfg.mode = dyn ? MODE_DYNAMIC : MODE_STATIC;
      cfg.a.nt = NT_W'(nt_a); cfg.a.i_top = IDX_W'(ia);
      cfg.w.nt = NT_W'(nt_w); cfg.w.i_top = IDX_W'(iw);
      cfg.o.nt = NT_W'(nt_o); cfg.o.i_top = IDX_W'(io);
      cfg.out_shift = 5'(sh);

      // activations: word t at a_base + t, lane r = row r
      for (int t = 0; t < ts; t++) begin
        word = '0;
        for (int r = 0; r < ROWS; r++) begin
          pack_t p = '0;
          for (int m = 0; m < m_cnt; m++) begin
            bit s = 1'($urandom); int mg = rand_mag();
            int tp = dyn ? dyn_top(mg, nt_a) : ia;
            if (dyn && tp < N - 1) n_lowidx++;
            put_elem(p, m, s, mg, nt_a, tp);
            av[t][r][m] = approx_val(s, mg, nt_a, tp);
          end
          word[r*PACK_W +: PACK_W] = p;
        end
        write_word(t, word);
      end
      // weights: word t at w_base + t, lane c = column c
      for (int t = 0; t < ts; t++) begin
        word = '0;
        for (int c = 0; c < COLS; c++) begin
          pack_t p = '0;
          for (int m = 0; m < m_cnt; m++) begin
            bit s = 1'($urandom); int mg = rand_mag();
            int tp = dyn ? dyn_top(mg, nt_w) : iw;
            put_elem(p, m, s, mg, nt_w, tp);
            wv[t][c][m] = approx_val(s, mg, nt_w, tp);
          end
          word[c*PACK_W +: PACK_W] = p;
        end
        write_word(ts + t, word);
      end

      // chained tile: the activations of step 0 are the previous tile's
      // output row 0 (elements of columns 0..ROWS-1 land on rows 0..ROWS-1)
      a_base = '0;
      if (chain && prev_nt_ok(nt_a)) begin
        a_base = ADDR_W'(2 * ts);
        // the previous outputs occupy 2T .. 2T+ROWS-1; step t reads 2T+t
        for (int t = 0; t < ts; t++)
          for (int r = 0; r < ROWS; r++) begin
            pack_t p = prev_out[t % ROWS][r*PACK_W +: PACK_W];
            av[t][r][0] = get_elem(p, 0, nt_a, 1'b1, 0);
          end
        n_chain++;
      end

      foreach (cexp[r, c]) begin
        cexp[r][c] = 0;
        for (int t = 0; t < ts; t++)
          for (int m = 0; m < m_cnt; m++)
            cexp[r][c] += longint'(av[t][r][m]) * longint'(wv[t][c][m]);
      end

      w_base  = ADDR_W'(ts);
      o_base  = ADDR_W'(2 * ts + ROWS);
      n_steps = 16'(ts);
      start   = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      cycles = 0;
      do begin
        @(posedge clk);
        cycles++;
        #1;
      end while (!done && cycles < ts + 4 * (ROWS + COLS) + 10);
      check(done, "done never came");
      check(cycles == ts + 2 * ROWS + COLS,
            $sformatf("tile %0d latency %0d, expected %0d", tile, cycles, ts + 2*ROWS + COLS));
      @(negedge clk);
      check(!busy, "busy after done");

      exp_sat = 0;
      for (int r = 0; r < ROWS; r++) begin
        read_word(2 * ts + ROWS + r, word);
        // keep output rows for chaining: move them to 2T .. 2T+ROWS-1
        prev_out[r] = word;
        for (int c = 0; c < COLS; c++) begin
          pack_t p = word[c*PACK_W +: PACK_W];
          longint v = cexp[r][c];
          bit neg = v < 0;
          longint mag = (neg ? -v : v) >>> sh;
          int tp, got, expv;
          if (mag > (1 << MAG_W) - 1) begin
            mag = (1 << MAG_W) - 1;
            exp_sat++;
          end
          tp   = dyn ? dyn_top(int'(mag), nt_o) : io;
          expv = approx_val(neg && mag != 0, int'(mag), nt_o, tp);
          got  = get_elem(p, 0, nt_o, dyn, io);
          check(got == expv, $sformatf("tile %0d cfg(%0d,%0d) dyn=%0d out[%0d][%0d]: got %0d exp %0d (acc %0d)",
                                       tile, nt_w, nt_a, dyn, r, c, got, expv, v));
        end
      end
      check(int'(sat_count) == exp_sat, $sformatf("sat_count %0d exp %0d", sat_count, exp_sat));
      for (int r = 0; r < ROWS; r++) write_word(2 * ts + r, prev_out[r]);
      prev_nt = nt_o;

      if (dyn) n_dynamic++; else n_static++;
      if (m_cnt > 1) n_multi++;
      if (exp_sat > 0) n_sat++;
      n_cfg[ci]++;
    end

    $display("mechanisms: static=%0d dynamic=%0d multi_mac=%0d saturation=%0d low_index=%0d chained=%0d",
             n_static, n_dynamic, n_multi, n_sat, n_lowidx, n_chain);
    if (!WORKLOAD) begin
    check(n_static > 0, "static mode never ran");
    check(n_dynamic > 0, "dynamic mode never ran");
    check(n_multi > 0, "several MACs per cycle never happened");
    check(n_sat > 0, "output saturation never happened");
    check(n_lowidx > 0, "dynamic index below the top block never happened");
    for (int i = 0; i < n_cfgs(); i++) check(n_cfg[i] > 0, $sformatf("configuration %0d never ran", i));
    if (N_TILES >= 12 && ROWS == COLS) check(n_chain > 0, "output reuse never happened");
    end else begin
      check(n_multi > 0, "several MACs per cycle never happened");
      check(n_dynamic == N_TILES, "workload tiles must run in dynamic mode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();

  // Layer-shaped tiles (workload mode): one 32-output-channel x 32-pixel
  // tile per layer, with the reduction length of a typical layer of each
  // network and the configuration that network uses. Layer shapes are
  // common knowledge of these networks; the configurations are the ones
  // reported for them (dynamic mode, K=2).
  //   0: AlexNet conv2, 5x5x48 = 1200 inputs, (2,1,2): 600 words
  //   1: ResNet50 3x3 conv, 3x3x64 = 576 inputs, (2,1,2): 288 words
  //   2: MobileNetV2 1x1 projection, 384 inputs, (2,2,2): 384 words
  //   3: AlexNet layer at (2,1,1) (mixed-precision network), 1200 inputs: 300 words
  //   4: MobileNetV2 layer at (2,1,2) (mixed-precision network), 384 inputs: 192 words
  function automatic void layer_table(int i, output int nt_w, output int nt_a, output int words);
    int d;
    case (i % 5)
      0: begin nt_w = 1; nt_a = 2; d = 1200; end
      1: begin nt_w = 1; nt_a = 2; d = 576;  end
      2: begin nt_w = 2; nt_a = 2; d = 384;  end
      3: begin nt_w = 1; nt_a = 1; d = 1200; end
      default: begin nt_w = 1; nt_a = 2; d = 384; end
    endcase
    if (nt_w * nt_a > N) begin  // a block size other than 2: fall back to (1,1)
      nt_w = 1; nt_a = 1;
    end
    words = (d + N / (nt_w * nt_a) - 1) / (N / (nt_w * nt_a));
    if (words > T_STEPS) words = T_STEPS;
  endfunction

  function automatic bit prev_nt_ok(int nt);
    return prev_nt == nt;
  endfunction

endmodule
