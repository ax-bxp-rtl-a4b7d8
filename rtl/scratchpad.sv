// scratchpad: on-chip buffer of the accelerator (2 MB by default).
//
// A word holds one packed operand (pack_t) for every row or column of the
// array, so one read delivers everything the array edge needs for one cycle.
// Two synchronous read ports serve the activation and weight streams; one
// write port takes host loads and the output blocks written back by the
// ToAx-BxP units. Read data appears one cycle after the address. A read and
// a write of the same word in one cycle return the old contents.
//
// Follows the paper: a 2 MB on-chip scratchpad feeding the array and
// receiving the output blocks. This design's choice: the word width, the port
// count and the one-cycle read latency; the paper models the memory with an
// analytical SRAM model and gives no organisation. DEPTH is the number of
// whole words that fit in BYTES.
module scratchpad #(
  parameter int unsigned WORD_W = 640,
  parameter int unsigned BYTES  = 2 * 1024 * 1024,
  parameter int unsigned DEPTH  = (BYTES * 8) / WORD_W,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
)(
  input  logic              clk,
  input  logic              re_a,
  input  logic [ADDR_W-1:0] addr_a,
  output logic [WORD_W-1:0] rdata_a,
  input  logic              re_b,
  input  logic [ADDR_W-1:0] addr_b,
  output logic [WORD_W-1:0] rdata_b,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WORD_W-1:0] wdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[addr_a];
    if (re_b) rdata_b <= mem[addr_b];
  end

  initial assert (DEPTH <= (1 << ADDR_W)) else $error("scratchpad: ADDR_W too small");

endmodule
