// axbxp_pkg: constants, types and helper functions shared by the Ax-BxP
// accelerator.
//
// Number format. An operand is an 8-bit sign-magnitude value (BW = 8: sign
// plus a 7-bit magnitude). The magnitude is cut into N = ceil(BW/K) blocks of
// K bits; block i has place value 2^(i*K). An Ax-BxP tensor keeps only NT
// ("N-tilde") consecutive blocks of each element, from block I down to block
// I-NT+1. In static mode I is one value for the whole tensor; in dynamic mode
// each element carries its own I, stored as the offset I-(NT-1), which takes
// ceil(log2(N-NT+1)) bits and is held here in an IDX_W-bit field.
//
// Packed operand word (pack_t). One pack travels to each row or column of
// the array per cycle. It has N block slots of K bits, N sign bits and N
// index fields. With L = NT_A*NT_W partial products per MAC and N multipliers
// per PE, M = floor(N/L) MACs are issued per cycle; element m of a pack uses
// slots m*NT .. m*NT+NT-1 (slot m*NT+t holds block I-t, most significant
// first), sign bit m and index field m. M*NT <= N always holds, so the slots
// suffice.
//
// The block size K is fixed at synthesis time, as in the paper; edit the
// default here to build the K=3 or K=4 variant. BW, the 32-bit accumulator
// and the separate per-element sign bit: BW and the accumulator follow the
// paper, the sign bit and the pack layout are this design's own choices.
package axbxp_pkg;

  parameter int unsigned K     = 2;               // bits per block
  parameter int unsigned BW    = 8;               // operand bit-width
  parameter int unsigned N     = (BW + K - 1) / K; // blocks per operand
  parameter int unsigned ACC_W = 32;              // accumulator width
  parameter int unsigned MAG_W = BW - 1;          // magnitude bits

  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;   // block index / offset
  localparam int unsigned NT_W  = $clog2(N + 1);             // holds 1..N
  localparam int unsigned SH_W  = $clog2((N - 1) * K + 1);   // shift of one operand block
  localparam int unsigned PSH_W = SH_W + 1;                  // s_a + s_w
  localparam int unsigned PACK_W = N * K + N + N * IDX_W;

  typedef enum logic {MODE_STATIC = 1'b0, MODE_DYNAMIC = 1'b1} idx_mode_e;

  // One multiplier lane: a signed (K+1)-bit block and its shift amount.
  typedef struct packed {
    logic signed [K:0]  blk;
    logic [SH_W-1:0]    sh;
  } lane_t;

  typedef lane_t [N-1:0] lane_bus_t;

  typedef struct packed {
    logic [N-1:0][IDX_W-1:0] idx;   // per-element offset I-(NT-1) (dynamic mode)
    logic [N-1:0]            sign;  // per-element sign
    logic [N-1:0][K-1:0]     blk;   // block slots
  } pack_t;

  // Parameters of one operand tensor, broadcast at the start of a layer.
  typedef struct packed {
    logic [NT_W-1:0]  nt;      // NT, blocks kept per element (1..N)
    logic [IDX_W-1:0] i_top;   // I, index of the top block (static mode)
  } tensor_cfg_t;

  typedef struct packed {
    idx_mode_e   mode;
    tensor_cfg_t a;            // activations
    tensor_cfg_t w;            // weights
    tensor_cfg_t o;            // output activations written back
    logic [4:0]  out_shift;    // right shift applied before ToAx-BxP
  } layer_cfg_t;

  // MACs issued per cycle for a configuration: floor(N / (NT_A*NT_W)).
  function automatic int unsigned macs_per_cycle(input int unsigned nt_a,
                                                 input int unsigned nt_w);
    int unsigned l;
    l = nt_a * nt_w;
    if (l == 0 || l > N) return 0;
    return N / l;
  endfunction

endpackage
