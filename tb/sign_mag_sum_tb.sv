`timescale 1ps/1ps
// sign_mag_sum_tb: random selected weights for 12 clauses; sum_m must equal
// the total positive magnitude and sum_s the total negative magnitude. A
// second instance with a 5-bit sum checks saturation at 31.
module sign_mag_sum_tb;
  localparam int NC = tm_pkg::NUM_CLAUSE, WM = tm_pkg::WMAG_W, SW = tm_pkg::SUM_W;
  logic [NC-1:0]          neg;
  logic [NC-1:0][WM-1:0]  mag;
  logic [SW-1:0]          s, m;
  logic [4:0]             s5, m5;
  int checks = 0, failures = 0, n_sat = 0;

  sign_mag_sum dut (.sel_neg(neg), .sel_mag(mag), .sum_s(s), .sum_m(m));
  sign_mag_sum #(.SUM_W(5)) dut5 (.sel_neg(neg), .sel_mag(mag), .sum_s(s5), .sum_m(m5));

  initial begin
    int es, em;
    for (int t = 0; t < 2000; t++) begin
      neg = NC'($urandom);
      for (int j = 0; j < NC; j++) mag[j] = WM'($urandom);
      if (t % 10 == 0) neg = '0;
      #1;
      es = 0; em = 0;
      for (int j = 0; j < NC; j++) if (neg[j]) es += int'(mag[j]); else em += int'(mag[j]);
      checks += 2;
      if (int'(s) != es) begin failures++; $display("FAIL s=%0d exp %0d", s, es); end
      if (int'(m) != em) begin failures++; $display("FAIL m=%0d exp %0d", m, em); end
      if (em > 31) n_sat++;
      checks += 2;
      if (int'(s5) != ((es > 31) ? 31 : es)) begin failures++; $display("FAIL s5=%0d exp %0d", s5, es); end
      if (int'(m5) != ((em > 31) ? 31 : em)) begin failures++; $display("FAIL m5=%0d exp %0d", m5, em); end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
