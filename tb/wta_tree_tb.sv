`timescale 1ps/1ps
// wta_tree_tb: the tree arbiter at the default class count (three classes,
// one padding leaf) and at five classes (three padding leaves), both driven
// from the same race signals rising at random, distinct or equal times.
// In each, exactly the earliest of its race signals (lowest index on a tie)
// must be granted, one mutex delay per tree level after it rises, the grant must stay
// one-hot, and no grant may remain once every race signal has fallen.
module wta_tree_tb;
  localparam int NK = tm_pkg::NUM_CLASS, NB = 5, TM = tm_pkg::T_MUTEX_PS;
  localparam int DA = $clog2(NK), DB = $clog2(NB);   // tree depths
  logic [NB-1:0] race, grant_b;
  logic [NK-1:0] grant_a;
  int checks = 0, failures = 0, n_win_a [NK], n_win_b [NB];

  wta_tree dut_a (.race_class(race[NK-1:0]), .grant(grant_a));
  wta_tree #(.NUM_CLASS(NB)) dut_b (.race_class(race), .grant(grant_b));

  always @(grant_a or grant_b) begin
    checks++;
    if (!$onehot0(grant_a) || !$onehot0(grant_b)) begin
      failures++; $display("FAIL grant %b / %b", grant_a, grant_b);
    end
  end

  // Time from the start of each round to the first grant of each tree.
  longint t0, t_a, t_b;
  always @(posedge (|grant_a)) t_a = $time - t0;
  always @(posedge (|grant_b)) t_b = $time - t0;

  initial begin
    int d [NB];
    int fa, fb, ta, tb;
    race = '0;
    #200;
    for (int t = 0; t < 600; t++) begin
      t0 = $time;
      fa = 0; ta = 1000; fb = 0; tb = 1000;
      for (int c = 0; c < NB; c++) begin
        d[c] = (t % 7 == 0) ? 5 : $urandom_range(0, 60);
        if (c < NK && d[c] < ta) begin ta = d[c]; fa = c; end
        if (d[c] < tb) begin tb = d[c]; fb = c; end
      end
      for (int c = 0; c < NB; c++) begin
        automatic int cc = c;
        fork begin #(d[cc]) race[cc] = 1'b1; end join_none
      end
      #(80);   // every race signal has risen and every tree has settled
      checks++;
      if (grant_a != NK'(1 << fa)) begin failures++; $display("FAIL 3-class grant=%b expected class %0d", grant_a, fa); end
      checks++;
      if (grant_b != NB'(1 << fb)) begin failures++; $display("FAIL 5-class grant=%b expected class %0d", grant_b, fb); end
      checks++;
      if (t_a != ta + DA * TM) begin failures++; $display("FAIL 3-class grant after %0d ps, expected %0d", t_a, ta + DA * TM); end
      checks++;
      if (t_b != tb + DB * TM) begin failures++; $display("FAIL 5-class grant after %0d ps, expected %0d", t_b, tb + DB * TM); end
      n_win_a[fa]++; n_win_b[fb]++;
      #100;
      race = '0;
      #(DB * TM + 1);
      checks++;
      if (grant_a != '0 || grant_b != '0) begin failures++; $display("FAIL grant not released"); end
      #20;
    end
    for (int c = 0; c < NK; c++) begin
      checks++; if (n_win_a[c] == 0) begin failures++; $display("FAIL 3-class: class %0d never won", c); end
    end
    for (int c = 0; c < NB; c++) begin
      checks++; if (n_win_b[c] == 0) begin failures++; $display("FAIL 5-class: class %0d never won", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
