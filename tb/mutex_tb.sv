`timescale 1ps/1ps
// mutex_tb: two requests with random arrival order and spacing (including
// exact ties). The earlier request must be granted T_MUTEX_PS after it
// arrives (r0 on a tie); the grants are never both high; when the winner
// withdraws, the waiting request is granted; grants fall with requests.
module mutex_tb;
  localparam int TM = tm_pkg::T_MUTEX_PS;
  logic r0, r1, g0, g1;
  int checks = 0, failures = 0, n_tie = 0, n_hand = 0;

  mutex dut (.r0(r0), .r1(r1), .g0(g0), .g1(g1));

  always @(g0 or g1) begin
    checks++;
    if (g0 && g1) begin failures++; $display("FAIL both grants at %0t", $time); end
  end

  initial begin
    int d0, d1;
    bit w0;
    r0 = 0; r1 = 0;
    #100;
    for (int t = 0; t < 500; t++) begin
      d0 = $urandom_range(0, 40);
      d1 = (t % 10 == 0) ? d0 : $urandom_range(0, 40);
      if (d0 == d1) n_tie++;
      w0 = (d0 <= d1);
      fork
        begin #(d0) r0 = 1; end
        begin #(d1) r1 = 1; end
      join
      #(TM + 1);
      checks++;
      if (g0 != w0 || g1 != !w0) begin failures++; $display("FAIL d0=%0d d1=%0d g0=%b g1=%b", d0, d1, g0, g1); end
      // The winner withdraws; the other must take over.
      if (w0) r0 = 0; else r1 = 0;
      #(TM + 1);
      checks++;
      if (g0 != !w0 || g1 != w0) begin failures++; $display("FAIL hand-over g0=%b g1=%b", g0, g1); end
      else n_hand++;
      r0 = 0; r1 = 0;
      #(TM + 1);
      checks++;
      if (g0 || g1) begin failures++; $display("FAIL grants not released"); end
      #20;
    end
    checks++; if (n_tie == 0) begin failures++; $display("FAIL no tie tested"); end
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
