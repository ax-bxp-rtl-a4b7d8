// axbxp_accel_tb: end-to-end test of the accelerator at reduced size
// (4x4 array, 2 KB scratchpad), 30 tiles over every configuration in
// both modes. All checking is in axbxp_accel_driver.
module axbxp_accel_tb;
  import axbxp_pkg::*;

  localparam int ROWS = 4, COLS = 4, SPAD_BYTES = 2048;
  localparam int WORD_W = ROWS * PACK_W;
  localparam int DEPTH  = SPAD_BYTES * 8 / WORD_W;
  localparam int ADDR_W = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, host_we, host_re, start, busy, done;
  logic [ADDR_W-1:0] host_waddr, host_raddr, a_base, w_base, o_base;
  logic [WORD_W-1:0] host_wdata, host_rdata;
  logic [15:0] n_steps, sat_count;
  layer_cfg_t cfg;

  axbxp_accel #(.ROWS(ROWS), .COLS(COLS), .SPAD_BYTES(SPAD_BYTES)) dut (.*);

  axbxp_accel_driver #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WORD_W), .ADDR_W(ADDR_W),
                       .N_TILES(30), .T_STEPS(6)) drv (.*);
endmodule
