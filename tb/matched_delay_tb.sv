`timescale 1ps/1ps
// matched_delay_tb: both edges of a, at random spacings longer than the
// delay, must appear on z exactly DELAY_PS later.
module matched_delay_tb;
  localparam int D = tm_pkg::MATCH_DELAY_PS;
  logic a, z;
  int checks = 0, failures = 0;
  time t_a;

  matched_delay dut (.a(a), .z(z));

  initial begin
    a = 0;
    #1000;
    for (int t = 0; t < 100; t++) begin
      a = !a; t_a = $time;
      @(z);
      checks++;
      if ($time - t_a != D || z != a) begin failures++; $display("FAIL delay %0t z=%b a=%b", $time - t_a, z, a); end
      #($urandom_range(10, 900));
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
