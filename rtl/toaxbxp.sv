// toaxbxp: converts a 32-bit output activation into one Ax-BxP element.
//
// The signed accumulator value is turned into sign and magnitude, the
// magnitude is shifted right by `out_shift` (rescaling to the 8-bit range)
// and saturated to MAG_W bits. The magnitude is cut into N blocks of K bits.
// In dynamic mode the unit finds the most significant non-zero block and
// keeps NT consecutive blocks starting there; when fewer than NT blocks lie
// at or below it, the window is moved up so that it ends at block 0, which
// makes the stored offset I-(NT-1) lie in 0..N-NT. In static mode the window
// starts at the broadcast index I. Blocks outside the window are dropped
// (truncation, no rounding).
//
// Output: a pack_t holding the element in slot group 0 (slots 0..NT-1, most
// significant first), sign bit 0 and index field 0; all other fields zero.
// A zero magnitude is stored with a zero sign. Purely combinational.
//
// Follows the paper: the block choice of its Convert-To-AxBxP procedure
// (dynamic-idx) and the static-idx rule. This design's choice: the
// rescaling shift, saturation and window clamping at block 0, none of which
// the paper specifies.
module toaxbxp
  import axbxp_pkg::*;
(
  input  logic signed [ACC_W-1:0] acc,
  input  idx_mode_e              mode,
  input  tensor_cfg_t            cfg,
  input  logic [4:0]             out_shift,
  output pack_t                  elem,
  output logic                   saturated
);

  logic                 neg;
  logic [ACC_W-1:0]     mag_full;
  logic [ACC_W-1:0]     mag_shr;
  logic [N*K-1:0]       mag;
  int unsigned          msnz, top, nt;

  always_comb begin
    neg       = acc[ACC_W-1];
    mag_full  = neg ? ACC_W'(-acc) : ACC_W'(acc);
    mag_shr   = mag_full >> out_shift;
    saturated = (mag_shr > ACC_W'((1 << MAG_W) - 1));
    mag       = '0;
    mag[MAG_W-1:0] = saturated ? MAG_W'((1 << MAG_W) - 1) : mag_shr[MAG_W-1:0];

    msnz = 0;
    for (int unsigned i = 0; i < N; i++)
      if (mag[i*K +: K] != '0) msnz = i;

    nt  = int'(cfg.nt);
    if (mode == MODE_DYNAMIC) top = (msnz + 1 >= nt) ? msnz : nt - 1;
    else                      top = int'(cfg.i_top);

    elem = '0;
    for (int unsigned t = 0; t < N; t++)
      if (t < nt && top >= t) elem.blk[t] = mag[(top - t)*K +: K];
    elem.sign[0] = neg && (mag != '0);
    elem.idx[0]  = (mode == MODE_DYNAMIC) ? IDX_W'(top + 1 - nt) : '0;
  end

endmodule
