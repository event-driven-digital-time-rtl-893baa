`timescale 1ps/1ps
// wta_mesh_tb: three race signals rise at random, distinct or equal times.
// Exactly the earliest one (lowest index on a tie) must be granted, one
// mutex delay after it rises, and the grant must stay one-hot until all race
// signals fall, after which no grant remains.
module wta_mesh_tb;
  localparam int NK = tm_pkg::NUM_CLASS, TM = tm_pkg::T_MUTEX_PS;
  logic [NK-1:0] race, grant;
  int checks = 0, failures = 0, n_win [NK];

  wta_mesh dut (.race_class(race), .grant(grant));

  always @(grant) begin
    checks++;
    if (!$onehot0(grant)) begin failures++; $display("FAIL grant %b", grant); end
  end

  initial begin
    int d [NK];
    int first, tfirst;
    race = '0;
    #100;
    for (int t = 0; t < 600; t++) begin
      first = 0; tfirst = 1000;
      for (int c = 0; c < NK; c++) begin
        d[c] = (t % 7 == 0) ? 5 : $urandom_range(0, 60);
        if (d[c] < tfirst) begin tfirst = d[c]; first = c; end
      end
      for (int c = 0; c < NK; c++) begin
        automatic int cc = c;
        fork begin #(d[cc]) race[cc] = 1'b1; end join_none
      end
      #(tfirst + TM - 1);
      checks++;
      if (grant != '0) begin failures++; $display("FAIL grant too early %b", grant); end
      #2;
      checks++;
      if (grant != NK'(1 << first)) begin failures++; $display("FAIL grant=%b expected class %0d (d=%0d,%0d,%0d)", grant, first, d[0], d[1], d[2]); end
      n_win[first]++;
      #100;
      race = '0;
      #(3 * TM + 1);
      checks++;
      if (grant != '0) begin failures++; $display("FAIL grant not released"); end
      #20;
    end
    for (int c = 0; c < NK; c++) begin
      checks++; if (n_win[c] == 0) begin failures++; $display("FAIL class %0d never won", c); end
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
