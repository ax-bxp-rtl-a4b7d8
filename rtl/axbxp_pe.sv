// axbxp_pe: Ax-BxP processing element for an output-stationary systolic array.
//
// Each cycle the PE receives N activation lanes from the left and N weight
// lanes from above. Lane j carries a signed (K+1)-bit block and that block's
// shift amount. The PE forms the N products a_j*w_j on N (K+1)x(K+1) signed
// multipliers, shifts product j left by s_a[j]+s_w[j], adds the N shifted
// terms and adds the sum into a 32-bit accumulator. Lanes that carry a zero
// block contribute nothing, so idle lanes need no separate valid bit.
//
// Both lane buses are registered and passed on (activations to the right,
// weights down), one cycle per hop. `clear` zeroes the accumulator
// synchronously; a clear in the same cycle as data drops that data.
//
// Follows the paper: N multipliers of K+1 bits, N shifters, shared adder
// and 32-bit accumulator. This design's choice: the adder is one
// combinational tree in the same cycle as the multipliers (no pipelining),
// and the accumulator wraps on overflow.
module axbxp_pe
  import axbxp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  lane_bus_t        a_in,
  input  lane_bus_t        w_in,
  output lane_bus_t        a_out,
  output lane_bus_t        w_out,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] lane_sum;

  always_comb begin
    lane_sum = '0;
    for (int j = 0; j < int'(N); j++) begin
      logic signed [2*K+1:0]    prod;
      logic signed [ACC_W-1:0]  prod_ext;
      prod     = a_in[j].blk * w_in[j].blk;
      prod_ext = ACC_W'(prod);
      lane_sum = lane_sum + (prod_ext <<< (PSH_W'(a_in[j].sh) + PSH_W'(w_in[j].sh)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      a_out <= '0;
      w_out <= '0;
    end else begin
      a_out <= a_in;
      w_out <= w_in;
      if (clear) acc <= '0;
      else       acc <= acc + lane_sum;
    end
  end

endmodule
