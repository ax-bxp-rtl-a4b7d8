// axbxp_workload_tb: layer-shaped tiles on the accelerator at its default
// size (32x32 PEs, 2 MB scratchpad, K=2), no parameter overrides.
//
// Each tile is one 32-output-channel x 32-pixel block of a convolution layer
// of AlexNet, ResNet50 or MobileNetV2, with that layer's full reduction
// length (up to 1200 products per output) streamed in one tile, in dynamic
// mode with the configuration each network uses: (2,1,2) for AlexNet and
// ResNet50, (2,2,2) for MobileNetV2, plus (2,1,1) and (2,1,2) layers of the
// mixed-precision variants. Layer shapes are standard for these networks and
// are this testbench's choice; operand values are random. The table and all
// checking (outputs, saturation count, latency) are in axbxp_accel_driver,
// which ends the run; the outer watchdog here only fires if it never does.
module axbxp_workload_tb;
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
                       .N_TILES(5), .T_STEPS(600), .WORKLOAD(1'b1),
                       .WATCHDOG_CYCLES(400000)) drv (.*);

  initial begin
    #5ms;
    $display("outer watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end
endmodule
