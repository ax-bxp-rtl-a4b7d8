// axbxp_ref_pkg: reference arithmetic for the Ax-BxP testbenches.
//
// Works on plain integers, not on the RTL's bit fields: an operand is a sign
// and a magnitude, the blocks kept for top index I and NT blocks are
// obtained as (mag mod 2^((I+1)K)) - (mag mod 2^((I-NT+1)K)), and the
// dynamic index is found by repeated division by 2^K. Also builds the
// packed operand words the accelerator reads (the memory format).
package axbxp_ref_pkg;
  import axbxp_pkg::*;

  localparam int RADIX = 1 << K;

  function automatic int pow_radix(int e);
    int p = 1;
    for (int i = 0; i < e; i++) p = p * RADIX;
    return p;
  endfunction

  // Index of the most significant non-zero block, clamped so that NT
  // blocks fit at or below it.
  function automatic int dyn_top(int mag, int nt);
    int msnz = 0;
    int v = mag;
    while (v >= RADIX) begin
      v = v / RADIX;
      msnz++;
    end
    return (msnz < nt - 1) ? nt - 1 : msnz;
  endfunction

  // Magnitude that remains when only blocks top..top-nt+1 are kept.
  function automatic int kept_mag(int mag, int nt, int top);
    int lo = top - nt + 1;
    if (lo < 0) lo = 0;
    return (mag % pow_radix(top + 1)) - (mag % pow_radix(lo));
  endfunction

  function automatic int approx_val(bit sign, int mag, int nt, int top);
    int k = kept_mag(mag, nt, top);
    return sign ? -k : k;
  endfunction

  // Put element m (sign, magnitude, NT blocks from `top`) into a pack.
  function automatic void put_elem(ref pack_t p, input int m, input bit sign,
                                   input int mag, input int nt, input int top);
    for (int t = 0; t < nt; t++) begin
      int b = top - t;
      p.blk[m*nt + t] = K'((mag / pow_radix(b)) % RADIX);
    end
    p.sign[m] = sign;
    p.idx[m]  = IDX_W'(top - (nt - 1));
  endfunction

  // Decode element m of a pack back to a signed value (dynamic: index from
  // the pack; static: `top` given).
  function automatic int get_elem(pack_t p, int m, int nt, bit dynamic, int top);
    int t_top = dynamic ? int'(p.idx[m]) + nt - 1 : top;
    int v = 0;
    for (int t = 0; t < nt; t++) v = v + int'(p.blk[m*nt + t]) * pow_radix(t_top - t);
    return p.sign[m] ? -v : v;
  endfunction

  // Random 7-bit magnitude, often small so that dynamic indexing matters.
  function automatic int rand_mag();
    int sel = $urandom_range(0, 3);
    if (sel == 0) return $urandom_range(0, 3);
    if (sel == 1) return $urandom_range(0, 15);
    return $urandom_range(0, (1 << MAG_W) - 1);
  endfunction

  // The Ax-BxP configurations (K, NT_W, NT_A) of the design space for the
  // built K: five for K=2, three for K=3, two for K=4.
  function automatic int n_cfgs();
    return (K == 2) ? 5 : (K == 3) ? 3 : 2;
  endfunction

  function automatic void cfg_table(int i, output int nt_w, output int nt_a);
    int j = i % n_cfgs();
    nt_w = 1;
    if (K == 2) begin
      case (j)
        0: nt_a = 4;
        1: nt_a = 3;
        2: begin nt_w = 2; nt_a = 2; end
        3: nt_a = 2;
        default: nt_a = 1;
      endcase
    end else if (K == 3) begin
      nt_a = 3 - j;
    end else begin
      nt_a = 2 - j;
    end
  endfunction

endpackage
