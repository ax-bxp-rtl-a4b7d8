// axbxp_control: operand control unit at the edge of the systolic array.
//
// One instance sits at the left of every row (activations) and one on top
// of every column (weights). Each cycle it takes one packed operand word
// (pack_t, see axbxp_pkg) and produces the N multiplier lanes of the PEs:
// each chosen K-bit block becomes a signed (K+1)-bit block (the element's
// sign applied to the block's magnitude), and each block gets the shift
// amount i*K, where i is the block's index within the operand.
//
// The block indices come from NT and I. In static mode I is the tensor-wide
// value broadcast at the start of the layer; in dynamic mode I is read from
// each element (stored offset + NT - 1). The per-lane layout: with
// L = NT_A*NT_W, lane l serves MAC m = l / L and partial product r = l % L,
// where r = p*NT_A + q pairs weight block p with activation block q. A weight
// control therefore places weight block t = r / NT_A on lane l and an
// activation control places activation block t = r % NT_A there. Lanes at or
// above M*L carry zero.
//
// Combinational; `valid` low forces all lanes to zero. IS_WEIGHT selects the
// role. Follows the paper: splitting into signed (K+1)-bit blocks and the
// shift amount i*K, NT and I broadcast per layer in static mode and read per
// element in dynamic mode. This design's choice: the pack layout and the
// lane assignment that lets M = floor(N/L) MACs share one PE per cycle.
// The configuration rules (NT in 1..N, NT_A*NT_W <= N, static I >= NT-1)
// are asserted where the configuration is latched, in axbxp_accel.
module axbxp_control
  import axbxp_pkg::*;
#(
  parameter bit IS_WEIGHT = 1'b0
)(
  input  logic        valid,
  input  idx_mode_e   mode,
  input  tensor_cfg_t own,     // this operand's NT and static I
  input  logic [NT_W-1:0] nt_other,  // the other operand's NT
  input  pack_t       pack,
  output lane_bus_t   lanes
);

  always_comb begin
    int unsigned nt_a, nt_w, nt_own, l_pp, m_cnt;
    nt_own = int'(own.nt);
    nt_a   = IS_WEIGHT ? int'(nt_other) : nt_own;
    nt_w   = IS_WEIGHT ? nt_own : int'(nt_other);
    l_pp   = nt_a * nt_w;
    m_cnt  = macs_per_cycle(nt_a, nt_w);
    lanes  = '0;
    for (int unsigned l = 0; l < N; l++) begin
      int unsigned m, r, t, top, b, slot;
      logic [K:0] mag;
      m = 0; r = 0; t = 0; top = 0; b = 0; slot = 0; mag = '0;
      if (valid && m_cnt != 0 && l < m_cnt * l_pp) begin
        m    = l / l_pp;
        r    = l % l_pp;
        t    = IS_WEIGHT ? (r / nt_a) : (r % nt_a);
        slot = m * nt_own + t;
        top  = (mode == MODE_DYNAMIC) ? int'(pack.idx[m]) + nt_own - 1 : int'(own.i_top);
        b    = top - t;
        mag  = {1'b0, pack.blk[slot]};
        lanes[l].blk = pack.sign[m] ? -mag : mag;
        lanes[l].sh  = SH_W'(b * K);
      end
    end
  end

endmodule
