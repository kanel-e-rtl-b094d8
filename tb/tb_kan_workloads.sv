// tb_kan_workloads: runs the networks the paper evaluates through kan_core.
//
// Each network is a kan_core instance with the layer sizes d_l and bit widths n_l of the
// paper (Table 2 and the HalfCheetah actor of Table 6), driven and checked by its own
// kan_core_checker with random samples. Where the paper reports a latency, the checker
// also requires the core's latency to equal it in clocks: the reported nanoseconds times
// the reported clock frequency. The networks the paper trains with threshold T = 0 are
// built here with no edge pruned (PRUNE_LEVEL = -1), so their adder trees have the full
// fan-in the paper's latencies imply. The truth tables are the stand-in tables of kan_pkg,
// so accuracy is not what is tested; the datapath, the pipeline depths and the streaming
// rate of one sample per clock are. JSC CERNBox, the default network, has its own
// testbench (tb_kan_core); MNIST is not run (see the README).
module tb_kan_workloads;
  import kan_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int NW = 6;
  logic done [NW];
  int chk [NW];
  int fail [NW];

  // Moons, Table 4: 5 cycles
  localparam int DIMS_0 [3] = '{2, 2, 1};
  localparam int BITS_0 [3] = '{6, 5, 8};
  logic iv_0, ov_0;
  logic signed [5:0] x_0 [2];
  logic signed [7:0] y_0 [1];

  kan_core #(.NUM_LAYERS(2), .DIMS(DIMS_0), .BITS(BITS_0), .PRUNE_LEVEL(-1)) dut_moons (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_0), .x_in(x_0), .out_valid(ov_0), .y_out(y_0));

  kan_core_checker #(.NAME("moons"), .NUM_LAYERS(2), .DIMS(DIMS_0), .BITS(BITS_0),
                     .PRUNE_LEVEL(-1), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b0),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(5)) chk_moons (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_0), .x_in(x_0), .out_valid(ov_0), .y_out(y_0),
    .done(done[0]), .checks(chk[0]), .failures(fail[0]));

  // Wine, Table 4: 6 cycles
  localparam int DIMS_1 [3] = '{13, 4, 3};
  localparam int BITS_1 [3] = '{6, 7, 8};
  logic iv_1, ov_1;
  logic signed [5:0] x_1 [13];
  logic signed [7:0] y_1 [3];

  kan_core #(.NUM_LAYERS(2), .DIMS(DIMS_1), .BITS(BITS_1), .PRUNE_LEVEL(-1)) dut_wine (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_1), .x_in(x_1), .out_valid(ov_1), .y_out(y_1));

  kan_core_checker #(.NAME("wine"), .NUM_LAYERS(2), .DIMS(DIMS_1), .BITS(BITS_1),
                     .PRUNE_LEVEL(-1), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b0),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(6)) chk_wine (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_1), .x_in(x_1), .out_valid(ov_1), .y_out(y_1),
    .done(done[1]), .checks(chk[1]), .failures(fail[1]));

  // Dry Bean, Table 4: 6 cycles
  localparam int DIMS_2 [3] = '{16, 2, 7};
  localparam int BITS_2 [3] = '{6, 6, 8};
  logic iv_2, ov_2;
  logic signed [5:0] x_2 [16];
  logic signed [7:0] y_2 [7];

  kan_core #(.NUM_LAYERS(2), .DIMS(DIMS_2), .BITS(BITS_2), .PRUNE_LEVEL(-1)) dut_dry_bean (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_2), .x_in(x_2), .out_valid(ov_2), .y_out(y_2));

  kan_core_checker #(.NAME("dry_bean"), .NUM_LAYERS(2), .DIMS(DIMS_2), .BITS(BITS_2),
                     .PRUNE_LEVEL(-1), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b0),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(6)) chk_dry_bean (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_2), .x_in(x_2), .out_valid(ov_2), .y_out(y_2),
    .done(done[2]), .checks(chk[2]), .failures(fail[2]));

  // JSC OpenML, Table 3: 7.1 ns at 987 MHz = 7 cycles
  localparam int DIMS_3 [3] = '{16, 8, 5};
  localparam int BITS_3 [3] = '{6, 7, 6};
  logic iv_3, ov_3;
  logic signed [5:0] x_3 [16];
  logic signed [5:0] y_3 [5];

  kan_core #(.NUM_LAYERS(2), .DIMS(DIMS_3), .BITS(BITS_3), .PRUNE_LEVEL(-1)) dut_jsc_openml (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_3), .x_in(x_3), .out_valid(ov_3), .y_out(y_3));

  kan_core_checker #(.NAME("jsc_openml"), .NUM_LAYERS(2), .DIMS(DIMS_3), .BITS(BITS_3),
                     .PRUNE_LEVEL(-1), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b0),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(7)) chk_jsc_openml (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_3), .x_in(x_3), .out_valid(ov_3), .y_out(y_3),
    .done(done[3]), .checks(chk[3]), .failures(fail[3]));

  // HalfCheetah actor, Table 6: 4.5 ns at 884 MHz = 4 cycles
  localparam int DIMS_4 [2] = '{17, 6};
  localparam int BITS_4 [2] = '{8, 8};
  logic iv_4, ov_4;
  logic signed [7:0] x_4 [17];
  logic signed [7:0] y_4 [6];

  kan_core #(.NUM_LAYERS(1), .DIMS(DIMS_4), .BITS(BITS_4), .PRUNE_LEVEL(-1)) dut_halfcheetah (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_4), .x_in(x_4), .out_valid(ov_4), .y_out(y_4));

  kan_core_checker #(.NAME("halfcheetah"), .NUM_LAYERS(1), .DIMS(DIMS_4), .BITS(BITS_4),
                     .PRUNE_LEVEL(-1), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b0),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(4)) chk_halfcheetah (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_4), .x_in(x_4), .out_valid(ov_4), .y_out(y_4),
    .done(done[4]), .checks(chk[4]), .failures(fail[4]));

  // ToyADMOS autoencoder, Table 5: 0.07 us at 228 M inferences/s (II = 1) = 16 cycles
  localparam int DIMS_5 [5] = '{64, 16, 8, 16, 64};
  localparam int BITS_5 [5] = '{7, 8, 8, 7, 8};
  logic iv_5, ov_5;
  logic signed [6:0] x_5 [64];
  logic signed [7:0] y_5 [64];

  kan_core #(.NUM_LAYERS(4), .DIMS(DIMS_5), .BITS(BITS_5), .PRUNE_LEVEL(0)) dut_toyadmos (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_5), .x_in(x_5), .out_valid(ov_5), .y_out(y_5));

  kan_core_checker #(.NAME("toyadmos"), .NUM_LAYERS(4), .DIMS(DIMS_5), .BITS(BITS_5),
                     .PRUNE_LEVEL(0), .N_SAMPLES(200), .REQUIRE_PRUNE(1'b1),
                     .REQUIRE_SAT(1'b0), .PAPER_LATENCY(16)) chk_toyadmos (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_5), .x_in(x_5), .out_valid(ov_5), .y_out(y_5),
    .done(done[5]), .checks(chk[5]), .failures(fail[5]));

  function automatic bit all_done();
    foreach (done[i]) if (!done[i]) return 1'b0;
    return 1'b1;
  endfunction

  function automatic int total(input int v [NW]);
    int t;
    t = 0;
    foreach (v[i]) t += v[i];
    return t;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!all_done()) @(posedge clk);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail));
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end
endmodule
