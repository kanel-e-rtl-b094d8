// tb_kan_llut: checks an L-LUT against the table formula of kan_pkg.
//
// Two L-LUTs (a 6-bit-input edge with 9-bit words and a 3-bit-input edge with 5-bit words)
// are swept over every address, then driven with random addresses back to back. Each
// output is compared, one clock after its address, with kan_pkg::llut_entry() for the same
// (seed, layer, q, p) and address.
module tb_kan_llut;
  import kan_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        [5:0] xa;
  logic signed [8:0] ya;
  logic        [2:0] xb;
  logic signed [4:0] yb;
  int checks = 0, failures = 0;

  kan_llut #(.IN_W(6), .LUT_W(9), .LAYER(1), .Q(2), .P(3)) u_a (.clk(clk), .x(xa), .y(ya));
  kan_llut #(.IN_W(3), .LUT_W(5), .LAYER(0), .Q(5), .P(1)) u_b (.clk(clk), .x(xb), .y(yb));

  task automatic apply(input int a, input int b);
    int ea, eb;
    @(negedge clk);
    xa = 6'(a);
    xb = 3'(b);
    ea = llut_entry(DEF_SEED, 1, 2, 3, a, 9);
    eb = llut_entry(DEF_SEED, 0, 5, 1, b, 5);
    @(negedge clk);
    checks += 2;
    if (int'(ya) != ea) begin
      failures++;
      $display("FAIL: table A[%0d] = %0d, expected %0d", a, ya, ea);
    end
    if (int'(yb) != eb) begin
      failures++;
      $display("FAIL: table B[%0d] = %0d, expected %0d", b, yb, eb);
    end
  endtask

  int prev_a, prev_b, na, nb, nonzero;

  initial begin
    nonzero = 0;
    for (int i = 0; i < 64; i++) begin
      apply(i, i % 8);
      if (ya != 0) nonzero++;
    end
    checks++;
    if (nonzero < 8) begin
      failures++;
      $display("FAIL: table A is almost all zero (%0d non-zero words)", nonzero);
    end
    // Back-to-back random addresses: the word for the address applied at one falling edge
    // must be visible at the next falling edge, while the next address is already applied.
    prev_a = -1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      if (prev_a >= 0) begin
        checks += 2;
        if (int'(ya) != llut_entry(DEF_SEED, 1, 2, 3, prev_a, 9)) failures++;
        if (int'(yb) != llut_entry(DEF_SEED, 0, 5, 1, prev_b, 5)) failures++;
      end
      na = int'($urandom_range(0, 63));
      nb = int'($urandom_range(0, 7));
      xa = 6'(na);
      xb = 3'(nb);
      prev_a = na;
      prev_b = nb;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
