`timescale 1ps/1ps
// diff_delay_path_tb: for every (k, f) code, a launch edge must come out
// after T_CELL + k*tau + f*tau/2**e, on the rising and on the falling edge.
module diff_delay_path_tb;
  localparam int TAU = tm_pkg::TAU_PS, E = tm_pkg::E_BITS, KB = tm_pkg::K_BITS, TC = tm_pkg::T_CELL_PS;
  logic          rin, rout;
  logic [KB-1:0] k;
  logic [E-1:0]  f;
  int checks = 0, failures = 0;
  time t0;

  diff_delay_path dut (.race_in(rin), .k(k), .f(f), .race_out(rout));

  initial begin
    int exp_d;
    rin = 0; k = '0; f = '0;
    #100;
    for (int kk = 0; kk < (1 << KB); kk++)
      for (int ff = 0; ff < (1 << E); ff++) begin
        k = KB'(kk); f = E'(ff);
        exp_d = TC + kk * TAU + (ff * TAU) / (1 << E);
        for (int edge_i = 0; edge_i < 2; edge_i++) begin
          rin = !rin; t0 = $time;
          @(rout);
          checks++;
          if ($time - t0 != exp_d || rout != rin) begin
            failures++; $display("FAIL k=%0d f=%0d delay=%0t expected %0d", kk, ff, $time - t0, exp_d);
          end
          #50;
        end
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
