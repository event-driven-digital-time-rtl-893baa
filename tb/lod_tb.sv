`timescale 1ps/1ps
// lod_tb: exhaustive test of the leading-ones detector at its default size
// (8-bit sum, e = 3). Every input 0..255 is compared with k = floor(log2 v)
// and f = floor((v - 2**k) * 2**e / 2**k), an arithmetic restatement of
// the shift rules; 0 is expected to give k = 0, f = 0.
module lod_tb;
  localparam int SW = tm_pkg::SUM_W, E = tm_pkg::E_BITS, KB = tm_pkg::K_BITS;
  logic [SW-1:0] v;
  logic [KB-1:0] k;
  logic [E-1:0]  f;
  int checks = 0, failures = 0;

  lod dut (.sum_value(v), .k(k), .f(f));

  initial begin
    int ek, ef;
    for (int i = 0; i < (1 << SW); i++) begin
      v = SW'(i);
      #1;
      ek = 0;
      while ((2 << ek) <= i) ek++;
      ef = (i == 0) ? 0 : ((i - (1 << ek)) * (1 << E)) / (1 << ek);
      checks++;
      if (int'(k) != ek || int'(f) != ef) begin
        failures++;
        $display("FAIL v=%0d k=%0d f=%0d expected k=%0d f=%0d", i, k, f, ek, ef);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
