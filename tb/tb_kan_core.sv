// tb_kan_core: end-to-end test of kan_core at its default size, the JSC CERNBox network
// (16 inputs of 8 bits, 12 hidden neurons of 8 bits, 5 outputs of 6 bits).
//
// The core is instantiated with no parameter overrides. kan_core_checker, configured with
// the same network description, streams 400 random samples through it, compares every
// output and the 7-cycle latency with its own model, and checks that pruning, high and
// low saturation, rounding, back-to-back samples and idle cycles all occurred.
module tb_kan_core;
  import kan_pkg::*;

  localparam int NL = DEF_NUM_LAYERS;
  localparam int DIMS [NL+1] = '{16, 12, 5};
  localparam int BITS [NL+1] = '{8, 8, 6};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, out_valid, done;
  logic signed [BITS[0]-1:0]  x_in  [DIMS[0]];
  logic signed [BITS[NL]-1:0] y_out [DIMS[NL]];
  int checks, failures;

  always #5 clk = ~clk;

  kan_core dut (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .x_in     (x_in),
    .out_valid(out_valid),
    .y_out    (y_out)
  );

  kan_core_checker #(
    .NAME      ("jsc_cernbox"),
    .NUM_LAYERS(NL),
    .DIMS      (DIMS),
    .BITS      (BITS),
    .N_SAMPLES (400)
  ) u_chk (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .x_in     (x_in),
    .out_valid(out_valid),
    .y_out    (y_out),
    .done     (done),
    .checks   (checks),
    .failures (failures)
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
