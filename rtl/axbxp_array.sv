// axbxp_array: ROWS x COLS output-stationary systolic array of Ax-BxP PEs.
//
// Activations enter at the left: a_pack[r] goes through the row-r control
// unit (axbxp_control, activation role) and then through r skew registers
// before reaching PE(r,0); from there it moves one PE to the right per cycle.
// Weights enter at the top: w_pack[c] goes through the column-c control unit
// (weight role) and c skew registers to PE(0,c), then moves down one PE per
// cycle. Operands presented together at the edge therefore meet in PE(r,c)
// r+c cycles later, and PE(r,c) accumulates sum_t A_t[r] * W_t[c].
//
// The layer parameters (mode, NT and I of each operand) are broadcast to all
// control units. `clear` zeroes every accumulator. An input taken at clock
// edge E is added into PE(r,c) at edge E+r+c, so all results are final after
// edge E_last+ROWS+COLS-2. acc[r][c] is the accumulator of PE(r,c).
//
// Follows the paper: output-stationary dataflow, a control unit per row and
// per column, weights flowing down and activations flowing right (Fig. 8),
// 32x32 PEs. This design's choice: the skew registers placed after the
// control units inside the array.
module axbxp_array
  import axbxp_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       in_valid,
  input  layer_cfg_t cfg,
  input  pack_t      a_pack [ROWS],
  input  pack_t      w_pack [COLS],
  output logic signed [ACC_W-1:0] acc [ROWS][COLS]
);

  lane_bus_t a_ctl [ROWS];
  lane_bus_t w_ctl [COLS];
  lane_bus_t a_h   [ROWS][COLS+1];   // a_h[r][c] enters PE(r,c)
  lane_bus_t w_v   [ROWS+1][COLS];   // w_v[r][c] enters PE(r,c)

  for (genvar r = 0; r < ROWS; r++) begin : g_row_ctl
    axbxp_control #(.IS_WEIGHT(1'b0)) u_ctl (
      .valid(in_valid), .mode(cfg.mode), .own(cfg.a), .nt_other(cfg.w.nt),
      .pack(a_pack[r]), .lanes(a_ctl[r])
    );
    if (r == 0) begin : g_noskew
      assign a_h[r][0] = a_ctl[r];
    end else begin : g_skew
      lane_bus_t sk [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int i = 0; i < r; i++) sk[i] <= '0;
        else begin
          sk[0] <= a_ctl[r];
          for (int i = 1; i < r; i++) sk[i] <= sk[i-1];
        end
      end
      assign a_h[r][0] = sk[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col_ctl
    axbxp_control #(.IS_WEIGHT(1'b1)) u_ctl (
      .valid(in_valid), .mode(cfg.mode), .own(cfg.w), .nt_other(cfg.a.nt),
      .pack(w_pack[c]), .lanes(w_ctl[c])
    );
    if (c == 0) begin : g_noskew
      assign w_v[0][c] = w_ctl[c];
    end else begin : g_skew
      lane_bus_t sk [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int i = 0; i < c; i++) sk[i] <= '0;
        else begin
          sk[0] <= w_ctl[c];
          for (int i = 1; i < c; i++) sk[i] <= sk[i-1];
        end
      end
      assign w_v[0][c] = sk[c-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      axbxp_pe u_pe (
        .clk, .rst_n, .clear,
        .a_in (a_h[r][c]),   .w_in (w_v[r][c]),
        .a_out(a_h[r][c+1]), .w_out(w_v[r+1][c]),
        .acc  (acc[r][c])
      );
    end
  end

endmodule
