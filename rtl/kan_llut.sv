// kan_llut: logical LUT (L-LUT) of one KAN edge phi_{q,p}.
//
// The edge's learned activation is not computed: its value for every possible input code
// is stored. The IN_W-bit input code addresses a 2^IN_W-word table of signed LUT_W-bit
// words, and the word read is registered (the "LUTs" then "FFs" rows of the pipelined
// adder-tree figure of the paper). On an FPGA the table becomes LUT fabric, not block RAM.
//
// Interface: x is the edge's input code (two's complement, used directly as the address);
// y is the registered table word.
// Timing: one clock from x to y; a new x every clock.
//
// Follows the paper: one table per surviving edge, input state space enumerated, output
// registered. This design's choice: the table contents come from kan_pkg::llut_entry(),
// a deterministic stand-in for the trained truth tables, selected by (SEED, LAYER, Q, P).
module kan_llut
  import kan_pkg::*;
#(
  parameter int          IN_W  = 8,
  parameter int          LUT_W = 10,
  parameter int unsigned SEED  = DEF_SEED,
  parameter int unsigned LAYER = 0,
  parameter int unsigned Q     = 0,
  parameter int unsigned P     = 0
) (
  input  logic                    clk,
  input  logic        [IN_W-1:0]  x,
  output logic signed [LUT_W-1:0] y
);

  localparam int DEPTH = 1 << IN_W;

  typedef logic [DEPTH-1:0][LUT_W-1:0] table_t;

  function automatic table_t build_table();
    table_t t;
    for (int i = 0; i < DEPTH; i++) t[i] = LUT_W'(llut_entry(SEED, LAYER, Q, P, i, LUT_W));
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_ff @(posedge clk) y <= signed'(TABLE[x]);

endmodule
