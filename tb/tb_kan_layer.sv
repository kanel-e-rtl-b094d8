// tb_kan_layer: checks single KAN layers, including pruning.
//
// Layer A (16 inputs of 4 bits, 5 outputs of 6 bits, output register on) keeps every edge
// whose table is not all zero. Layer B (3 inputs of 4 bits, 8 outputs of 7 bits, output
// register off) prunes every edge of amplitude class 3 or less, so its neurons keep different numbers of edges
// and at least one neuron loses all of them. kan_core_checker, set up as a one-layer
// network, streams random samples through each layer and checks every output against its
// own integer model and the latency 1 + ceil(log4(fan-in)) (+1 for the output register).
module tb_kan_layer;
  import kan_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int DIMS_A [2] = '{16, 5};
  localparam int BITS_A [2] = '{4, 6};
  localparam int DIMS_B [2] = '{3, 8};
  localparam int BITS_B [2] = '{4, 7};
  localparam int THR_B      = 3;

  logic                     iv_a, ov_a, iv_b, ov_b, done_a, done_b;
  logic signed [3:0]        x_a [16];
  logic signed [5:0]        y_a [5];
  logic signed [3:0]        x_b [3];
  logic signed [6:0]        y_b [8];
  int chk_a, fail_a, chk_b, fail_b;

  kan_layer #(.LAYER(0), .D_IN(16), .D_OUT(5), .IN_W(4), .OUT_W(6), .OUT_REG(1'b1)) u_a (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_a), .x_in(x_a), .out_valid(ov_a), .y_out(y_a));

  kan_core_checker #(.NAME("layer_a"), .NUM_LAYERS(1), .DIMS(DIMS_A), .BITS(BITS_A),
                     .N_SAMPLES(300), .EXTRA_LATENCY(1)) c_a (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_a), .x_in(x_a), .out_valid(ov_a), .y_out(y_a),
    .done(done_a), .checks(chk_a), .failures(fail_a));

  kan_layer #(.LAYER(0), .D_IN(3), .D_OUT(8), .IN_W(4), .OUT_W(7), .PRUNE_LEVEL(THR_B),
              .OUT_REG(1'b0)) u_b (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_b), .x_in(x_b), .out_valid(ov_b), .y_out(y_b));

  kan_core_checker #(.NAME("layer_b"), .NUM_LAYERS(1), .DIMS(DIMS_B), .BITS(BITS_B),
                     .PRUNE_LEVEL(THR_B), .N_SAMPLES(300), .REQUIRE_SAT(1'b0)) c_b (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_b), .x_in(x_b), .out_valid(ov_b), .y_out(y_b),
    .done(done_b), .checks(chk_b), .failures(fail_b));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_a && done_b);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b + 1);
    $finish;
  end
endmodule
