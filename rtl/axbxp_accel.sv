// axbxp_accel: Ax-BxP DNN accelerator, top level.
//
// Holds the scratchpad, the ROWS x COLS Ax-BxP systolic array with its row
// and column control units, one ToAx-BxP converter per column, the layer
// parameter register that is broadcast to the control units, and a small
// sequencer that computes one output tile of ROWS x COLS output activations.
//
// Operation. The host loads packed activations and weights into the
// scratchpad through the load port, sets `cfg` and the three base addresses
// and pulses `start`. The sequencer then
//   1. latches cfg and clears every accumulator (1 cycle),
//   2. streams n_steps words: word a_base+t feeds the rows, word w_base+t
//      feeds the columns (lane p of a word is the pack of row/column p),
//      one word pair per cycle, M = floor(N/(NT_A*NT_W)) MACs per PE per
//      word (n_steps cycles),
//   3. waits ROWS+COLS-1 cycles for the skewed wavefront to finish,
//   4. drains one array row per cycle: the COLS accumulators of row r pass
//      through the ToAx-BxP units and are written as word o_base+r, column c
//      in lane c, one element per pack (ROWS cycles),
// and pulses `done`. A tile therefore takes n_steps + 2*ROWS + COLS cycles
// from start to done. While busy, host loads are ignored and the read port is
// taken by the sequencer; `sat_count` counts outputs that saturated during
// the last tile.
//
// Follows the paper (Fig. 8): scratchpad, control units fed with the
// broadcast K, N, NT and I parameters, PEs, ToAx-BxP at the bottom of each
// column writing output blocks back to the scratchpad, 32x32 array, 2 MB
// scratchpad. This design's choice: the sequencer, the word layout, the
// host ports (which stand in for the off-chip memory interface the paper
// does not describe) and the one-element-per-pack output layout.
module axbxp_accel
  import axbxp_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned SPAD_BYTES = 2 * 1024 * 1024,
  parameter int unsigned LANES      = (ROWS > COLS) ? ROWS : COLS,
  parameter int unsigned WORD_W     = LANES * PACK_W,
  parameter int unsigned DEPTH      = (SPAD_BYTES * 8) / WORD_W,
  parameter int unsigned ADDR_W     = $clog2(DEPTH)
)(
  input  logic              clk,
  input  logic              rst_n,
  // scratchpad load / read-back port (off-chip side)
  input  logic              host_we,
  input  logic [ADDR_W-1:0] host_waddr,
  input  logic [WORD_W-1:0] host_wdata,
  input  logic              host_re,
  input  logic [ADDR_W-1:0] host_raddr,
  output logic [WORD_W-1:0] host_rdata,
  // layer / tile command
  input  layer_cfg_t        cfg,
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] w_base,
  input  logic [ADDR_W-1:0] o_base,
  input  logic [15:0]       n_steps,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [15:0]       sat_count
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_STREAM, S_FLUSH, S_DRAIN} state_e;

  state_e            state;
  layer_cfg_t        cfg_q;
  logic [ADDR_W-1:0] a_base_q, w_base_q, o_base_q;
  logic [15:0]       n_steps_q, step;
  logic [15:0]       wait_cnt;
  logic [$clog2(ROWS+1)-1:0] drain_row;
  logic              issue, in_valid;

  // scratchpad
  logic              sp_re_a, sp_re_b, sp_we;
  logic [ADDR_W-1:0] sp_addr_a, sp_addr_b, sp_waddr;
  logic [WORD_W-1:0] sp_rdata_a, sp_rdata_b, sp_wdata, out_word;

  scratchpad #(.WORD_W(WORD_W), .BYTES(SPAD_BYTES), .DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_spad (
    .clk,
    .re_a(sp_re_a), .addr_a(sp_addr_a), .rdata_a(sp_rdata_a),
    .re_b(sp_re_b), .addr_b(sp_addr_b), .rdata_b(sp_rdata_b),
    .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata)
  );

  assign issue     = (state == S_STREAM);
  assign sp_re_a   = issue || (state == S_IDLE && host_re);
  assign sp_addr_a = issue ? a_base_q + ADDR_W'(step) : host_raddr;
  assign sp_re_b   = issue;
  assign sp_addr_b = w_base_q + ADDR_W'(step);
  assign host_rdata = sp_rdata_a;

  assign sp_we    = (state == S_DRAIN) || (state == S_IDLE && host_we);
  assign sp_waddr = (state == S_DRAIN) ? o_base_q + ADDR_W'(drain_row) : host_waddr;
  assign sp_wdata = (state == S_DRAIN) ? out_word : host_wdata;

  // array
  pack_t a_pack [ROWS];
  pack_t w_pack [COLS];
  logic signed [ACC_W-1:0] acc [ROWS][COLS];

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) a_pack[r] = sp_rdata_a[r*PACK_W +: PACK_W];
    for (int c = 0; c < int'(COLS); c++) w_pack[c] = sp_rdata_b[c*PACK_W +: PACK_W];
  end

  axbxp_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .clear(state == S_CLEAR),
    .in_valid,
    .cfg(cfg_q),
    .a_pack, .w_pack,
    .acc
  );

  // ToAx-BxP, one per column, fed with the array row being drained
  pack_t       out_pack [COLS];
  logic [COLS-1:0] out_sat;

  for (genvar c = 0; c < COLS; c++) begin : g_toax
    logic [$clog2(ROWS)-1:0] row_sel;
    assign row_sel = drain_row[$clog2(ROWS)-1:0];
    toaxbxp u_toax (
      .acc(acc[row_sel][c]),
      .mode(cfg_q.mode), .cfg(cfg_q.o), .out_shift(cfg_q.out_shift),
      .elem(out_pack[c]), .saturated(out_sat[c])
    );
  end

  always_comb begin
    out_word = '0;
    for (int c = 0; c < int'(COLS); c++) out_word[c*PACK_W +: PACK_W] = out_pack[c];
  end

  // sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg_q     <= '0;
      a_base_q  <= '0;
      w_base_q  <= '0;
      o_base_q  <= '0;
      n_steps_q <= '0;
      step      <= '0;
      wait_cnt  <= '0;
      drain_row <= '0;
      in_valid  <= 1'b0;
      done      <= 1'b0;
      sat_count <= '0;
    end else begin
      done     <= 1'b0;
      in_valid <= issue;          // read data arrives one cycle after the address
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q     <= cfg;
          a_base_q  <= a_base;
          w_base_q  <= w_base;
          o_base_q  <= o_base;
          n_steps_q <= n_steps;
          sat_count <= '0;
          state     <= S_CLEAR;
        end
        S_CLEAR: begin
          step     <= '0;
          wait_cnt <= '0;
          state    <= (n_steps_q == 0) ? S_FLUSH : S_STREAM;
        end
        S_STREAM: begin
          step <= step + 1'b1;
          if (step == n_steps_q - 1'b1) state <= S_FLUSH;
        end
        S_FLUSH: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == 16'(ROWS + COLS - 2)) begin
            drain_row <= '0;
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          sat_count <= sat_count + 16'($countones(out_sat));
          drain_row <= drain_row + 1'b1;
          if (drain_row == ($bits(drain_row))'(ROWS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Rules for a layer configuration, checked when a tile starts: NT of each
  // tensor in 1..N, at most N partial products per MAC, and in static mode
  // a top index high enough for NT blocks.
  function automatic bit tensor_ok(tensor_cfg_t t, idx_mode_e mode);
    return t.nt >= 1 && int'(t.nt) <= int'(N) &&
           (mode == MODE_DYNAMIC || int'(t.i_top) + 1 >= int'(t.nt));
  endfunction

  cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |->
      tensor_ok(cfg.a, cfg.mode) && tensor_ok(cfg.w, cfg.mode) && tensor_ok(cfg.o, cfg.mode) &&
      int'(cfg.a.nt) * int'(cfg.w.nt) <= int'(N))
    else $error("axbxp_accel: illegal layer configuration at start");

endmodule
