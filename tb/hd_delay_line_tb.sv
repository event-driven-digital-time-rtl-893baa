`timescale 1ps/1ps
// hd_delay_line_tb: for random mismatch patterns (all-agree and
// all-disagree included), a launch edge must come out after
// T_CELL + popcount(mismatch) * UNIT, on the rising and the falling edge.
module hd_delay_line_tb;
  localparam int N = tm_pkg::NUM_CLAUSE / tm_pkg::NUM_CLASS;
  localparam int U = tm_pkg::HD_UNIT_PS, TC = tm_pkg::T_CELL_PS;
  logic         rin, rout;
  logic [N-1:0] mm;
  int checks = 0, failures = 0;
  time t0;

  hd_delay_line dut (.race_in(rin), .mismatch(mm), .race_out(rout));

  initial begin
    int exp_d, ones;
    rin = 0; mm = '0;
    #100;
    for (int t = 0; t < 200; t++) begin
      if (t == 0)      mm = '0;
      else if (t == 1) mm = '1;
      else             mm = N'($urandom);
      ones = 0;
      for (int j = 0; j < N; j++) ones += int'(mm[j]);
      exp_d = TC + ones * U;
      rin = !rin; t0 = $time;
      @(rout);
      checks++;
      if ($time - t0 != exp_d || rout != rin) begin
        failures++; $display("FAIL mismatch=%b delay=%0t expected %0d", mm, $time - t0, exp_d);
      end
      #50;
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
