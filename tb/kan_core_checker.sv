// kan_core_checker: stimulus generator and scoreboard for a kan_core of any size.
//
// It drives N_SAMPLES random input vectors into the core, mostly back to back (one per
// clock) with occasional idle cycles, and keeps, for each sample, the cycle it was sent
// and the outputs a software model of the network predicts. When out_valid rises it
// compares the core's outputs and the latency with the oldest outstanding sample.
//
// The software model works on plain integers: for every neuron it adds the table entries
// of the edges that kan_pkg::edge_kept() lists as surviving, rounds half up by LUT_FRAC
// bits and clips to the next layer's code range. The expected latency is worked out here
// on its own: per layer one L-LUT clock plus the smallest d with NADD^d >= the largest
// surviving fan-in, plus one register between consecutive layers.
//
// It also counts how often each mechanism of the core was exercised (edges pruned,
// outputs saturated high and low, sums rounded, samples sent back to back, idle cycles)
// and counts a failure for each that never happened, unless the REQUIRE_* switch is off.
//
// All inputs are driven and all outputs sampled on the falling clock edge; the cycle
// counter advances on the rising edge.
module kan_core_checker
  import kan_pkg::*;
#(
  parameter string       NAME        = "jsc_cernbox",
  parameter int          NUM_LAYERS  = DEF_NUM_LAYERS,
  parameter int          DIMS [NUM_LAYERS+1] = '{16, 12, 5},
  parameter int          BITS [NUM_LAYERS+1] = '{8, 8, 6},
  parameter int          NADD        = DEF_NADD,
  parameter int          LUT_FRAC    = DEF_LUT_FRAC,
  parameter int unsigned SEED        = DEF_SEED,
  parameter int          PRUNE_LEVEL = 0,
  parameter int          N_SAMPLES   = 200,
  parameter bit          REQUIRE_PRUNE = 1'b1,
  parameter bit          REQUIRE_SAT   = 1'b1,
  // Clocks the device under test adds beyond the core's own latency (a kan_layer with its
  // output register enabled adds one).
  parameter int          EXTRA_LATENCY = 0,
  // Latency in clocks that the paper reports for this network (0: not reported).
  parameter int          PAPER_LATENCY = 0
) (
  input  logic                                clk,
  input  logic                                rst_n,
  output logic                                in_valid,
  output logic signed [BITS[0]-1:0]           x_in  [DIMS[0]],
  input  logic                                out_valid,
  input  logic signed [BITS[NUM_LAYERS]-1:0]  y_out [DIMS[NUM_LAYERS]],
  output logic                                done,
  output int                                  checks,
  output int                                  failures
);

  localparam int DOUT = DIMS[NUM_LAYERS];

  typedef int vec_t[];

  bit     keep [NUM_LAYERS][][];
  int     exp_latency;
  int     n_dead, n_pruned, n_sat_hi, n_sat_lo, n_round, n_b2b, n_idle;
  int     cycle;
  int     sent, received;
  vec_t   exp_q [$];
  int     sent_at [$];

  // ---- reference model -------------------------------------------------------------
  function automatic vec_t model(input vec_t x, input bit count);
    vec_t a, b;
    a = x;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int lut_w, hi, lo;
      lut_w = BITS[l+1] + LUT_FRAC;
      hi    = (1 << (BITS[l+1] - 1)) - 1;
      lo    = -(1 << (BITS[l+1] - 1));
      b     = new[DIMS[l+1]];
      for (int q = 0; q < DIMS[l+1]; q++) begin
        int s, r;
        s = 0;
        for (int p = 0; p < DIMS[l]; p++) begin
          int idx;
          idx = a[p] & ((1 << BITS[l]) - 1);
          if (keep[l][q][p]) s += llut_entry(SEED, l, q, p, idx, lut_w);
        end
        if (count && LUT_FRAC > 0 && (s & ((1 << LUT_FRAC) - 1)) != 0) n_round++;
        r = (LUT_FRAC > 0) ? ((s + (1 << (LUT_FRAC - 1))) >>> LUT_FRAC) : s;
        if (r > hi) begin
          r = hi;
          if (count) n_sat_hi++;
        end else if (r < lo) begin
          r = lo;
          if (count) n_sat_lo++;
        end
        b[q] = r;
      end
      a = b;
    end
    return a;
  endfunction

  function automatic void build_mask();
    exp_latency = NUM_LAYERS - 1 + EXTRA_LATENCY;
    n_pruned    = 0;
    n_dead      = 0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      int maxn, d, reach;
      maxn = 0;
      keep[l] = new[DIMS[l+1]];
      for (int q = 0; q < DIMS[l+1]; q++) begin
        int n;
        n = 0;
        keep[l][q] = new[DIMS[l]];
        for (int p = 0; p < DIMS[l]; p++) begin
          keep[l][q][p] = edge_kept(SEED, l, q, p, PRUNE_LEVEL);
          if (keep[l][q][p]) n++;
          else n_pruned++;
        end
        if (n > maxn) maxn = n;
        if (n == 0) n_dead++;
      end
      d = 0;
      reach = 1;
      while (reach < maxn) begin
        reach *= NADD;
        d++;
      end
      exp_latency += 1 + d;
    end
  endfunction

  // ---- stimulus ---------------------------------------------------------------------
  function automatic int rand_code(input int bits);
    int r, hi, lo;
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    r  = int'($urandom_range(0, 9));
    if (r == 0) return hi;
    if (r == 1) return lo;
    return int'($urandom_range(0, (1 << bits) - 1)) + lo;
  endfunction

  initial begin
    in_valid = 1'b0;
    done     = 1'b0;
    checks   = 0;
    failures = 0;
    sent     = 0;
    n_b2b    = 0;
    n_idle   = 0;
    n_sat_hi = 0;
    n_sat_lo = 0;
    n_round  = 0;
    foreach (x_in[i]) x_in[i] = '0;
    build_mask();
    $display("[%s] pruned edges %0d, neurons with no edge left %0d, expected latency %0d cycles",
             NAME, n_pruned, n_dead, exp_latency);
    if (PAPER_LATENCY > 0) begin
      checks++;
      if (exp_latency != PAPER_LATENCY) begin
        failures++;
        $display("[%s] FAIL: model latency %0d differs from the reported %0d cycles",
                 NAME, exp_latency, PAPER_LATENCY);
      end
    end
    wait (rst_n === 1'b1);
    repeat (2) @(negedge clk);
    while (sent < N_SAMPLES) begin
      @(negedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid = 1'b0;
        n_idle++;
      end else begin
        vec_t xv;
        xv = new[DIMS[0]];
        foreach (xv[i]) begin
          xv[i]   = rand_code(BITS[0]);
          x_in[i] = BITS[0]'(xv[i]);
        end
        if (in_valid) n_b2b++;
        in_valid = 1'b1;
        exp_q.push_back(model(xv, 1'b1));
        sent_at.push_back(cycle);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // ---- scoreboard -------------------------------------------------------------------
  initial cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    received = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        if (exp_q.size() == 0) begin
          failures++;
          $display("[%s] FAIL: out_valid with no sample outstanding at cycle %0d", NAME, cycle);
        end else begin
          vec_t e;
          int   t0;
          e  = exp_q.pop_front();
          t0 = sent_at.pop_front();
          checks++;
          if (cycle - t0 != exp_latency) begin
            failures++;
            $display("[%s] FAIL: latency %0d, expected %0d", NAME, cycle - t0, exp_latency);
          end
          for (int j = 0; j < DOUT; j++) begin
            checks++;
            if (int'(y_out[j]) != e[j]) begin
              failures++;
              if (failures < 10)
                $display("[%s] FAIL: sample %0d output %0d = %0d, expected %0d",
                         NAME, received, j, y_out[j], e[j]);
            end
          end
        end
        received++;
        if (received == N_SAMPLES) begin
          checks++;
          if (n_b2b == 0)                   begin failures++; $display("[%s] FAIL: no back-to-back samples", NAME); end
          checks++;
          if (n_idle == 0)                  begin failures++; $display("[%s] FAIL: no idle cycles", NAME); end
          checks++;
          if (LUT_FRAC > 0 && n_round == 0) begin failures++; $display("[%s] FAIL: no rounding", NAME); end
          if (REQUIRE_PRUNE) begin
            checks++;
            if (n_pruned == 0) begin failures++; $display("[%s] FAIL: no pruned edge", NAME); end
          end
          if (REQUIRE_SAT) begin
            checks++;
            if (n_sat_hi == 0) begin failures++; $display("[%s] FAIL: no high saturation", NAME); end
            checks++;
            if (n_sat_lo == 0) begin failures++; $display("[%s] FAIL: no low saturation", NAME); end
          end
          $display("[%s] %0d samples, pruned edges %0d, saturations hi/lo %0d/%0d, rounded sums %0d, back-to-back %0d, idle cycles %0d",
                   NAME, received, n_pruned, n_sat_hi, n_sat_lo, n_round, n_b2b, n_idle);
          done = 1'b1;
        end
      end
    end
  end

endmodule
