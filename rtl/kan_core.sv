// kan_core: LUT-based Kolmogorov-Arnold network core, KAN(x) = Phi_{L-1}( ... Phi_0(x)).
//
// The network is a chain of NUM_LAYERS kan_layer instances. Layer l maps DIMS[l] signed
// BITS[l]-bit codes to DIMS[l+1] signed BITS[l+1]-bit codes. Each surviving edge of the
// network is one L-LUT holding its learned activation as a truth table; the sum at each
// node is a pipelined adder tree; the sum is rounded and saturated back to the next
// layer's code width. No multiplier and no block memory is used.
//
// Every layer but the last ends in the inter-layer pipeline register. The last layer's
// saturated outputs are not registered again, so the total latency is
//   sum over layers of (1 + ceil(log_NADD(N_l)))  +  (NUM_LAYERS - 1)  clocks,
// N_l being the largest number of surviving edges into one neuron of layer l. For the
// default JSC CERNBox network (16-12-5, no edge pruned below 16 or 12 inputs per neuron)
// that is 3 + 3 + 1 = 7 clocks. The core accepts one sample per clock (II = 1) and never
// stalls; in_valid travels with the data and comes out as out_valid.
//
// Interface: x_in[i] are the already quantized input features (signed BITS[0]-bit codes),
// y_out[j] the network outputs (signed BITS[NUM_LAYERS]-bit codes). rst_n (asynchronous,
// active low) clears only the valid pipeline; data registers need no reset.
//
// Follows the paper: the layer structure, one L-LUT per edge, pipelined adder trees of
// fan-in NADD, quantization and saturation after the tree, registers between layers, and
// the default sizes (Table 2, JSC CERNBox: d = [16, 12, 5], n = [8, 8, 6]). This design's
// choices: NADD = 4 (worked out from the paper's cycle counts), the LUT word format, the
// valid bit and the stand-in truth tables of kan_pkg.
module kan_core
  import kan_pkg::*;
#(
  parameter int          NUM_LAYERS = DEF_NUM_LAYERS,
  parameter int          DIMS [NUM_LAYERS+1] = '{16, 12, 5},
  parameter int          BITS [NUM_LAYERS+1] = '{8, 8, 6},
  parameter int          NADD        = DEF_NADD,
  parameter int          LUT_FRAC    = DEF_LUT_FRAC,
  parameter int unsigned SEED        = DEF_SEED,
  parameter int          PRUNE_LEVEL = 0
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic signed [BITS[0]-1:0]           x_in  [DIMS[0]],
  output logic                                out_valid,
  output logic signed [BITS[NUM_LAYERS]-1:0]  y_out [DIMS[NUM_LAYERS]]
);

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    logic                          v_in, v_out;
    logic signed [BITS[l]-1:0]     x [DIMS[l]];
    logic signed [BITS[l+1]-1:0]   y [DIMS[l+1]];

    if (l == 0) begin : g_first
      assign v_in = in_valid;
      assign x    = x_in;
    end else begin : g_next
      assign v_in = g_layer[l-1].v_out;
      assign x    = g_layer[l-1].y;
    end

    kan_layer #(
      .LAYER      (l),
      .D_IN       (DIMS[l]),
      .D_OUT      (DIMS[l+1]),
      .IN_W       (BITS[l]),
      .OUT_W      (BITS[l+1]),
      .LUT_FRAC   (LUT_FRAC),
      .NADD       (NADD),
      .SEED       (SEED),
      .PRUNE_LEVEL(PRUNE_LEVEL),
      .OUT_REG    (l < NUM_LAYERS - 1)
    ) u_layer (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v_in),
      .x_in     (x),
      .out_valid(v_out),
      .y_out    (y)
    );
  end

  assign out_valid = g_layer[NUM_LAYERS-1].v_out;
  assign y_out     = g_layer[NUM_LAYERS-1].y;

endmodule
