`timescale 1ps/1ps
// clause_evaluation_tb: random automaton states and features. After each
// fire0 pulse every clause must equal the AND, over the literals the clause
// includes, of the literal value; a feature change without fire0 must not
// reach the clauses (the literal register holds).
module clause_evaluation_tb;
  localparam int NF = tm_pkg::NUM_FEATURE, NC = tm_pkg::NUM_CLAUSE;
  logic                    rst, fire0;
  logic [NF-1:0]           x, x_cap;
  logic [NC-1:0][2*NF-1:0] ta;
  logic [NC-1:0]           cv;
  int checks = 0, failures = 0, n_fired = 0;

  clause_evaluation dut (.rst(rst), .fire0(fire0), .feature(x), .ta_exclude(ta), .clause_vector(cv));

  function automatic logic [NC-1:0] ref_cv(logic [NF-1:0] f);
    logic [NC-1:0] r;
    for (int j = 0; j < NC; j++) begin
      r[j] = 1'b1;
      for (int i = 0; i < NF; i++) begin
        if (!ta[j][2*i]   && !f[i]) r[j] = 1'b0;
        if (!ta[j][2*i+1] &&  f[i]) r[j] = 1'b0;
      end
    end
    return r;
  endfunction

  initial begin
    rst = 0; fire0 = 0; x = '0;
    for (int j = 0; j < NC; j++)
      for (int l = 0; l < 2*NF; l++) ta[j][l] = ($urandom_range(0, 7) != 0);
    #5 rst = 1;
    #5 rst = 0;
    for (int t = 0; t < 1000; t++) begin
      x = NF'($urandom);
      x_cap = x;
      #5 fire0 = 1;
      #5 fire0 = 0;
      x = NF'($urandom);            // must not reach the clauses
      #5;
      checks++;
      if (cv != ref_cv(x_cap)) begin failures++; $display("FAIL cv=%b exp=%b", cv, ref_cv(x_cap)); end
      n_fired += $countones(cv);
    end
    checks++;
    if (n_fired == 0) begin failures++; $display("FAIL no clause ever fired"); end
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
