`timescale 1ps/1ps
// dcde_tb: for every code dc, the race edge must come out after
// T_CELL + (DC_MAX - dc) * UNIT on both edges, so a larger code is faster.
module dcde_tb;
  localparam int U = tm_pkg::DCDE_UNIT_PS, DW = tm_pkg::DC_W, TC = tm_pkg::T_CELL_PS;
  localparam int DMAX = (1 << (DW - 1)) - 1;
  logic rin, rout;
  logic signed [DW-1:0] dc;
  int checks = 0, failures = 0;
  time t0;

  dcde dut (.race_in(rin), .dc(dc), .race_out(rout));

  initial begin
    int exp_d;
    rin = 0; dc = '0;
    #100;
    for (int c = -DMAX; c <= DMAX; c++) begin
      dc = DW'(c);
      exp_d = TC + (DMAX - c) * U;
      for (int e = 0; e < 2; e++) begin
        rin = !rin; t0 = $time;
        @(rout);
        checks++;
        if ($time - t0 != exp_d || rout != rin) begin failures++; $display("FAIL dc=%0d delay=%0t expected %0d", c, $time - t0, exp_d); end
        #30;
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
