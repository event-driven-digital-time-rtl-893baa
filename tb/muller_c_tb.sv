`timescale 1ps/1ps
// muller_c_tb: random input sequences on a 2-input and a 6-input C-element,
// compared with the truth table: all ones -> 1, all zeros -> 0, otherwise
// the previous output. Reset must force 0.
module muller_c_tb;
  logic       rst;
  logic [1:0] a2;
  logic [5:0] a6;
  logic       c2, c6, e2, e6;
  int checks = 0, failures = 0, n_hold = 0;

  muller_c #(.N(2)) dut2 (.rst(rst), .in(a2), .c(c2));
  muller_c #(.N(6)) dut6 (.rst(rst), .in(a6), .c(c6));

  initial begin
    rst = 0; a2 = '1; a6 = '1;
    #5 rst = 1;
    #5 checks += 2;
    if (c2 || c6) begin failures++; $display("FAIL reset"); end
    rst = 0; a2 = 2'b01; a6 = 6'b101010;
    e2 = 0; e6 = 0;
    for (int t = 0; t < 3000; t++) begin
      case ($urandom_range(0, 3))
        0: begin a2 = '1; a6 = '1; end
        1: begin a2 = '0; a6 = '0; end
        default: begin a2 = 2'($urandom); a6 = 6'($urandom); end
      endcase
      if (&a2) e2 = 1; else if (~|a2) e2 = 0; else n_hold++;
      if (&a6) e6 = 1; else if (~|a6) e6 = 0;
      #5 checks += 2;
      if (c2 != e2) begin failures++; $display("FAIL c2=%b exp %b in=%b", c2, e2, a2); end
      if (c6 != e6) begin failures++; $display("FAIL c6=%b exp %b in=%b", c6, e6, a6); end
    end
    checks++; if (n_hold == 0) begin failures++; $display("FAIL hold never seen"); end
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
