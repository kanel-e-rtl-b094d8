// tb_kan_requant: exhaustive check of rounding and saturation.
//
// Every 10-bit signed sum is applied to a requantizer with 2 fractional bits and a 6-bit
// output, and every 8-bit sum to one with no fractional bits and a 5-bit output. The
// expected code is floor((sum + half LSB) / LSB) clipped to the signed output range,
// computed here with integer division rather than shifts. The test also checks that
// both saturation directions and exact halves (which must round up) were exercised.
module tb_kan_requant;

  logic signed [9:0] s_a;
  logic signed [5:0] q_a;
  logic signed [7:0] s_b;
  logic signed [4:0] q_b;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_half = 0;

  kan_requant #(.IN_W(10), .OUT_W(6), .FRAC(2)) u_a (.sum(s_a), .q(q_a));
  kan_requant #(.IN_W(8),  .OUT_W(5), .FRAC(0)) u_b (.sum(s_b), .q(q_b));

  function automatic int floor_div(input int a, input int b);
    int d;
    d = a / b;
    if ((a % b != 0) && (a < 0)) d = d - 1;
    return d;
  endfunction

  function automatic int clip(input int v, input int bits);
    int hi, lo;
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  initial begin
    for (int v = -512; v < 512; v++) begin
      int e;
      s_a = 10'(v);
      #1;
      e = clip(floor_div(v + 2, 4), 6);
      if (floor_div(v + 2, 4) > 31) n_hi++;
      if (floor_div(v + 2, 4) < -32) n_lo++;
      if (v % 4 == 2 || v % 4 == -2) n_half++;
      checks++;
      if (int'(q_a) != e) begin
        failures++;
        if (failures < 10) $display("FAIL: A sum %0d -> %0d, expected %0d", v, q_a, e);
      end
    end
    for (int v = -128; v < 128; v++) begin
      s_b = 8'(v);
      #1;
      checks++;
      if (int'(q_b) != clip(v, 5)) begin
        failures++;
        if (failures < 10) $display("FAIL: B sum %0d -> %0d, expected %0d", v, q_b, clip(v, 5));
      end
    end
    checks++;
    if (n_hi == 0 || n_lo == 0 || n_half == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
