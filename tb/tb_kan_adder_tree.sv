// tb_kan_adder_tree: checks sums and stage counts of pipelined adder trees.
//
// Four trees are driven with new random terms every clock:
//   A: 16 terms, fan-in 4 -> 2 stages      B: 13 terms, fan-in 4, padded to 3 stages
//   C: 7 terms, fan-in 2 -> 3 stages       D: 1 term -> no stage (a wire)
// Each output is compared with the sum of the terms applied exactly DEPTH clocks earlier,
// computed here from a history of the applied terms, so both the total and the latency
// of every tree are checked.
module tb_kan_adder_tree;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int W = 8;

  logic signed [W-1:0]  da [16];
  logic signed [W-1:0]  db [13];
  logic signed [W-1:0]  dc [7];
  logic signed [W-1:0]  dd [1];
  logic signed [W+4:0]  sa, sb;
  logic signed [W+3:0]  sc;
  logic signed [W:0]    sd;

  kan_adder_tree #(.N(16), .NADD(4), .IN_W(W), .OUT_W(W+5))             u_a (.clk(clk), .din(da), .sum(sa));
  kan_adder_tree #(.N(13), .NADD(4), .IN_W(W), .OUT_W(W+5), .DEPTH(3))  u_b (.clk(clk), .din(db), .sum(sb));
  kan_adder_tree #(.N(7),  .NADD(2), .IN_W(W), .OUT_W(W+4))             u_c (.clk(clk), .din(dc), .sum(sc));
  kan_adder_tree #(.N(1),  .NADD(4), .IN_W(W), .OUT_W(W+1))             u_d (.clk(clk), .din(dd), .sum(sd));

  // History of the totals applied, newest first.
  int hist_a [$], hist_b [$], hist_c [$], hist_d [$];
  int checks = 0, failures = 0;

  function automatic int rnd();
    int r;
    r = int'($urandom_range(0, 4));
    if (r == 0) return 127;
    if (r == 1) return -128;
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  task automatic check(input string name, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL: tree %s sum %0d, expected %0d", name, got, exp_v);
    end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      int ta, tb_, tc, td;
      @(negedge clk);
      // Outputs now reflect the terms applied DEPTH falling edges ago.
      if (n >= 3) begin
        check("A", int'(sa), hist_a[1]);
        check("B", int'(sb), hist_b[2]);
        check("C", int'(sc), hist_c[2]);
      end
      ta = 0; tb_ = 0; tc = 0; td = 0;
      foreach (da[i]) begin da[i] = W'(rnd()); ta += int'(da[i]); end
      foreach (db[i]) begin db[i] = W'(rnd()); tb_ += int'(db[i]); end
      foreach (dc[i]) begin dc[i] = W'(rnd()); tc += int'(dc[i]); end
      dd[0] = W'(rnd());
      td = int'(dd[0]);
      #1;
      check("D", int'(sd), td);
      hist_a.push_front(ta);
      hist_b.push_front(tb_);
      hist_c.push_front(tc);
      hist_d.push_front(td);
      if (hist_a.size() > 8) begin
        void'(hist_a.pop_back());
        void'(hist_b.pop_back());
        void'(hist_c.pop_back());
        void'(hist_d.pop_back());
      end
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
