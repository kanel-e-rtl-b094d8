// kan_adder_tree: balanced, pipelined adder tree that sums the L-LUT outputs of one neuron.
//
// Each stage adds groups of up to NADD consecutive values from the previous stage and
// registers every partial sum. N inputs need ceil(log_NADD(N)) stages. When DEPTH is
// larger than that, the remaining stages only register the finished sum, so that every
// neuron of a layer has the same latency even when pruning has left them with different
// numbers of edges. All stages work at the full output width OUT_W, which cannot overflow
// because OUT_W leaves room for the sum of N IN_W-bit values.
//
// Interface: din[i] are signed IN_W-bit terms; sum is their signed OUT_W-bit total.
// Timing: DEPTH clocks from din to sum, one new set of terms per clock. With DEPTH = 0 the
// tree is a wire (a single term is only sign-extended).
//
// Follows the paper: balanced tree, at most n_add inputs per node, a register after each
// stage, depth ceil(log_nadd N). This design's choices: the grouping (consecutive inputs),
// the single accumulator width for every stage, and the padding stages up to DEPTH.
module kan_adder_tree
  import kan_pkg::*;
#(
  parameter int N     = 16,
  parameter int NADD  = DEF_NADD,
  parameter int IN_W  = 10,
  parameter int OUT_W = IN_W + $clog2(N + 1),
  parameter int DEPTH = tree_depth(N, NADD)
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);

  for (genvar s = 0; s <= DEPTH; s++) begin : g_stage
    localparam int CNT = tree_count(N, NADD, s);
    logic signed [OUT_W-1:0] st [CNT];

    if (s == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < N; i++) st[i] = OUT_W'(din[i]);
      end
    end else begin : g_add
      localparam int PREV = tree_count(N, NADD, s - 1);
      always_ff @(posedge clk) begin
        for (int i = 0; i < CNT; i++) begin
          logic signed [OUT_W-1:0] acc;
          acc = '0;
          for (int j = 0; j < NADD; j++) begin
            if (i * NADD + j < PREV) acc = acc + g_stage[s-1].st[i*NADD+j];
          end
          st[i] <= acc;
        end
      end
    end
  end

  assign sum = g_stage[DEPTH].st[0];

  initial begin
    assert (DEPTH >= tree_depth(N, NADD))
      else $fatal(1, "kan_adder_tree: DEPTH %0d too small for N=%0d", DEPTH, N);
    assert (NADD >= 2) else $fatal(1, "kan_adder_tree: NADD must be at least 2");
  end

endmodule
