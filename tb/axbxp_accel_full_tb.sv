// axbxp_accel_full_tb: end-to-end test of the accelerator at its default
// size (32x32 PEs, 2 MB scratchpad, K=2), no parameter overrides. Runs 12
// 32x32 output tiles that cover every configuration in both modes, with all
// checking in axbxp_accel_driver.
module axbxp_accel_full_tb;
  import axbxp_pkg::*;

  localparam int ROWS = 32, COLS = 32;
  localparam int WORD_W = ROWS * PACK_W;
  localparam int DEPTH  = (2 * 1024 * 1024 * 8) / WORD_W;
  localparam int ADDR_W = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, host_we, host_re, start, busy, done;
  logic [ADDR_W-1:0] host_waddr, host_raddr, a_base, w_base, o_base;
  logic [WORD_W-1:0] host_wdata, host_rdata;
  logic [15:0] n_steps, sat_count;
  layer_cfg_t cfg;

  axbxp_accel dut (.*);

  axbxp_accel_driver #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W), .ADDR_W(ADDR_W),
                       .N_TILES(12), .T_STEPS(8)) drv (.*);
endmodule
