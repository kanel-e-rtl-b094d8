// kan_pkg: shared constants, types and elaboration-time functions of the LUT-based
// KAN core.
//
// A KAN layer evaluates y_q = sum_p phi_{q,p}(x_p). Each surviving edge phi_{q,p} is held
// as a logical LUT (L-LUT): a truth table indexed by the n-bit input code that returns the
// edge's quantized contribution to the sum. Activations are signed two's-complement codes;
// an L-LUT word carries LUT_FRAC extra fractional bits below the output LSB, which the
// requantizer removes after the adder tree.
//
// In the published flow the truth tables come out of quantization-aware training. They are
// data, not design, and are not part of this RTL. So that the hardware can be built,
// simulated and checked without a trained model, llut_entry() computes a deterministic
// stand-in table from a 32-bit hash of (seed, layer, q, p, code). Each edge also gets an
// amplitude class 0..7, and class 0 is an all-zero table. Pruning is decided in training,
// by the L2 norm of each edge's function; the hardware only needs to know which edges
// survive. edge_kept() gives that list for the stand-in tables, ranking edges by their
// class, which sets the size of their norm. To deploy a trained model, replace
// llut_entry() and edge_kept() by functions or tables holding the trained entries and the
// pruning mask; nothing else changes.
//
// The timing helpers give the pipeline depth the paper defines:
// depth = ceil(log_nadd(N)) adder stages for N summed inputs.
package kan_pkg;

  // Default network: JSC CERNBox, d_l = [16, 12, 5], n_l = [8, 8, 6].
  localparam int DEF_NUM_LAYERS = 2;
  // Adder-tree fan-in. Four inputs per node reproduces every cycle latency the paper
  // reports (Tables 4 and 6); Fig. 5 draws the two-input case only as an illustration.
  localparam int DEF_NADD       = 4;
  // Extra fractional bits of an L-LUT word below the output LSB.
  localparam int DEF_LUT_FRAC   = 2;
  localparam int unsigned DEF_SEED = 32'h4B414E31;

  // 32-bit integer hash (xor-shift / multiply mixer).
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB352D;
    h = h ^ (h >> 15);
    h = h * 32'h846CA68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Per-edge key; its low three bits are the edge's amplitude class a (0..7).
  function automatic logic [31:0] edge_key(input int unsigned seed, input int unsigned layer,
                                           input int unsigned q, input int unsigned p);
    return mix32(seed ^ mix32((layer * 32'h9E3779B9) ^ mix32(q * 32'h0001_003F + p)));
  endfunction

  function automatic int edge_amp(input logic [31:0] key);
    return int'(key % 32'd8);
  endfunction

  // Stand-in truth-table word of the edge with key `key` at input code idx, as a signed
  // value that fits in lut_w bits: a uniformly spread value of amplitude a * R / 24, with
  // R the largest positive lut_w-bit value. Class a = 0 gives an all-zero table. The
  // amplitude is kept small so that most neuron sums stay inside the output range and
  // only some of them saturate.
  function automatic int llut_word(input logic [31:0] key, input int unsigned idx,
                                   input int lut_w);
    logic [31:0] h;
    int r, v;
    r = (1 << (lut_w - 1)) - 1;
    h = mix32(key ^ (idx * 32'h85EB_CA6B + 32'h1234_5677));
    v = int'(h % (2 * r + 1)) - r;
    return (v * edge_amp(key)) / 24;
  endfunction

  function automatic int llut_entry(input int unsigned seed, input int unsigned layer,
                                    input int unsigned q, input int unsigned p,
                                    input int unsigned idx, input int lut_w);
    return llut_word(edge_key(seed, layer, q, p), idx, lut_w);
  endfunction

  // Pruning decision for edge (layer, q, p). The expected L2 norm of a stand-in table is
  // proportional to its amplitude class, so keeping the edges whose class exceeds
  // prune_level is the norm-threshold rule of the training flow applied to these tables:
  // prune_level = 0 removes exactly the all-zero tables, -1 keeps every edge.
  function automatic bit edge_kept(input int unsigned seed, input int unsigned layer,
                                   input int unsigned q, input int unsigned p,
                                   input int prune_level);
    return edge_amp(edge_key(seed, layer, q, p)) > prune_level;
  endfunction

  // Number of nodes left after s adder stages of fan-in nadd, starting from n inputs.
  function automatic int tree_count(input int n, input int nadd, input int s);
    int c;
    c = n;
    for (int k = 0; k < s; k++) c = (c + nadd - 1) / nadd;
    return c;
  endfunction

  // depth = ceil(log_nadd(n)); 0 for n <= 1.
  function automatic int tree_depth(input int n, input int nadd);
    int d, c;
    d = 0;
    c = n;
    while (c > 1) begin
      c = (c + nadd - 1) / nadd;
      d++;
    end
    return d;
  endfunction

endpackage
