`timescale 1ps/1ps
// pipe_reg_tb: the register must load d on each rising edge of fire, hold
// it while d changes, and clear on reset.
module pipe_reg_tb;
  logic       rst, fire;
  logic [7:0] d, q, exp_q;
  int checks = 0, failures = 0;

  pipe_reg #(.W(8)) dut (.rst(rst), .fire(fire), .d(d), .q(q));

  initial begin
    rst = 0; fire = 0; d = 8'h5a;
    #5 rst = 1;
    #5 checks++; if (q != 0) begin failures++; $display("FAIL reset q=%h", q); end
    rst = 0;
    for (int t = 0; t < 300; t++) begin
      d = 8'($urandom); exp_q = d;
      #5 fire = 1;
      #5 fire = 0;
      d = 8'($urandom);
      #5 checks++;
      if (q != exp_q) begin failures++; $display("FAIL q=%h exp=%h", q, exp_q); end
    end
    rst = 1;
    #1 checks++; if (q != 0) begin failures++; $display("FAIL async reset q=%h", q); end
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
