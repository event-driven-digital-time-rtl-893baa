`timescale 1ps/1ps
// binary_mult_matrix_tb: random clause vectors and weights; every selected
// weight must equal the clause weight when the clause fired and zero
// (positive sign, zero magnitude) when it did not.
module binary_mult_matrix_tb;
  localparam int NC = tm_pkg::NUM_CLAUSE, NK = tm_pkg::NUM_CLASS, WM = tm_pkg::WMAG_W;
  logic [NC-1:0]                 cv;
  logic [NK-1:0][NC-1:0]         wn, sn;
  logic [NK-1:0][NC-1:0][WM-1:0] wm, sm;
  int checks = 0, failures = 0;

  binary_mult_matrix dut (.clause_vector(cv), .weight_neg(wn), .weight_mag(wm), .sel_neg(sn), .sel_mag(sm));

  initial begin
    for (int t = 0; t < 500; t++) begin
      cv = NC'($urandom);
      for (int c = 0; c < NK; c++) begin
        wn[c] = NC'($urandom);
        for (int j = 0; j < NC; j++) wm[c][j] = WM'($urandom);
      end
      #1;
      for (int c = 0; c < NK; c++)
        for (int j = 0; j < NC; j++) begin
          checks++;
          if (sn[c][j] != (cv[j] & wn[c][j]) || sm[c][j] != (cv[j] ? wm[c][j] : WM'(0))) begin
            failures++;
            $display("FAIL c=%0d j=%0d cv=%b sel=%b/%0d w=%b/%0d", c, j, cv[j], sn[c][j], sm[c][j], wn[c][j], wm[c][j]);
          end
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
