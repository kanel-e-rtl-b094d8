// kan_layer: one fully pipelined KAN layer, y_q = sat(round(sum_p phi_{q,p}(x_p))).
//
// Every edge (q, p) of the D_OUT x D_IN edge matrix that survives pruning (as listed by
// kan_pkg::edge_kept() for PRUNE_LEVEL) gets an L-LUT (kan_llut) addressed by input x_p.
// Pruned edges get no hardware at all. The surviving L-LUT outputs of neuron q feed a
// balanced pipelined adder tree (kan_adder_tree), whose sum is rounded and saturated to the
// OUT_W-bit code of the next layer (kan_requant). With OUT_REG set, the saturated outputs
// are captured in the inter-layer pipeline register before they feed the next layer.
//
// The pruning mask and the list of edges per neuron are worked out at elaboration. All adder trees of a layer are given the depth of the
// neuron with the most surviving edges, so one valid bit describes the whole layer; a
// neuron whose edges were all pruned outputs the code 0.
//
// Interface: x_in[p] are signed IN_W-bit input codes, y_out[q] signed OUT_W-bit output
// codes; in_valid / out_valid mark the clock cycles that carry a sample.
// Timing: LATENCY = 1 (L-LUT register) + DEPTH (adder stages) + OUT_REG clocks, where
// DEPTH = ceil(log_NADD(max surviving edges per neuron)); one sample per clock, no stalls.
//
// Follows the paper: one L-LUT per unpruned edge, a balanced pipelined adder tree per
// neuron, quantization and saturation at the end of the tree, a register between layers.
// This design's choices: the valid bit, equal tree depth for all neurons of a layer, the
// pruning-level encoding of the mask, and the output code 0 of a fully pruned neuron.
module kan_layer
  import kan_pkg::*;
#(
  parameter int          LAYER       = 0,
  parameter int          D_IN        = 16,
  parameter int          D_OUT       = 12,
  parameter int          IN_W        = 8,
  parameter int          OUT_W       = 8,
  parameter int          LUT_FRAC    = DEF_LUT_FRAC,
  parameter int          NADD        = DEF_NADD,
  parameter int unsigned SEED        = DEF_SEED,
  parameter int          PRUNE_LEVEL = 0,
  parameter bit          OUT_REG     = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x_in  [D_IN],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y_out [D_OUT]
);

  localparam int LUT_W = OUT_W + LUT_FRAC;
  localparam int SUM_W = LUT_W + $clog2(D_IN + 1);

  typedef logic [D_OUT-1:0][D_IN-1:0] mask_t;

  function automatic mask_t calc_mask();
    mask_t m;
    for (int q = 0; q < D_OUT; q++)
      for (int p = 0; p < D_IN; p++)
        m[q][p] = edge_kept(SEED, LAYER, q, p, PRUNE_LEVEL);
    return m;
  endfunction

  localparam mask_t MASK = calc_mask();

  function automatic int edges_of(input int q);
    int c;
    c = 0;
    for (int p = 0; p < D_IN; p++) c += int'(MASK[q][p]);
    return c;
  endfunction

  // Input index of the k-th surviving edge of neuron q.
  function automatic int src_of(input int q, input int k);
    int c, r;
    c = 0;
    r = 0;
    for (int p = 0; p < D_IN; p++) begin
      if (MASK[q][p]) begin
        if (c == k) r = p;
        c++;
      end
    end
    return r;
  endfunction

  function automatic int max_edges();
    int m;
    m = 0;
    for (int q = 0; q < D_OUT; q++) if (edges_of(q) > m) m = edges_of(q);
    return m;
  endfunction

  localparam int DEPTH   = tree_depth(max_edges(), NADD);
  localparam int LATENCY = 1 + DEPTH + int'(OUT_REG);

  logic signed [OUT_W-1:0] yq [D_OUT];

  for (genvar q = 0; q < D_OUT; q++) begin : g_neuron
    localparam int NQ = edges_of(q);
    logic signed [SUM_W-1:0] sum;

    if (NQ > 0) begin : g_live
      logic signed [LUT_W-1:0] terms [NQ];
      for (genvar k = 0; k < NQ; k++) begin : g_edge
        localparam int SRC = src_of(q, k);
        kan_llut #(
          .IN_W (IN_W),
          .LUT_W(LUT_W),
          .SEED (SEED),
          .LAYER(LAYER),
          .Q    (q),
          .P    (SRC)
        ) u_llut (
          .clk(clk),
          .x  (x_in[SRC]),
          .y  (terms[k])
        );
      end
      kan_adder_tree #(
        .N    (NQ),
        .NADD (NADD),
        .IN_W (LUT_W),
        .OUT_W(SUM_W),
        .DEPTH(DEPTH)
      ) u_tree (
        .clk(clk),
        .din(terms),
        .sum(sum)
      );
    end else begin : g_pruned
      assign sum = '0;
    end

    kan_requant #(
      .IN_W (SUM_W),
      .OUT_W(OUT_W),
      .FRAC (LUT_FRAC)
    ) u_requant (
      .sum(sum),
      .q  (yq[q])
    );
  end

  if (OUT_REG) begin : g_outreg
    always_ff @(posedge clk) y_out <= yq;
  end else begin : g_nooutreg
    assign y_out = yq;
  end

  // Valid bit delayed by LATENCY clocks, alongside the data pipeline.
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= LATENCY'({vpipe, in_valid});
  end
  assign out_valid = vpipe[LATENCY-1];

  initial assert (LUT_W <= 31) else $fatal(1, "kan_layer: L-LUT words wider than 31 bits");

endmodule
