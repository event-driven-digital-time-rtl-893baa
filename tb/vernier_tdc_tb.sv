`timescale 1ps/1ps
// vernier_tdc_tb: race_s and race_m rise at random times in either order
// (or together); dc must equal round((t_m - t_s) / LSB), saturated to
// +-(2**(DC_W-1) - 1), and hold until the next pair.
module vernier_tdc_tb;
  localparam int LSB = tm_pkg::TAU_PS / (1 << tm_pkg::E_BITS), DW = tm_pkg::DC_W;
  localparam int DMAX = (1 << (DW - 1)) - 1;
  logic rs, rm;
  logic signed [DW-1:0] dc;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0, n_sat = 0;

  vernier_tdc dut (.race_s(rs), .race_m(rm), .dc(dc));

  initial begin
    int ds, dm, e;
    rs = 0; rm = 0;
    #100;
    for (int t = 0; t < 500; t++) begin
      ds = $urandom_range(0, 700);
      dm = (t % 50 == 0) ? ds + 900 : $urandom_range(0, 700);
      fork
        begin #(ds) rs = 1; end
        begin #(dm) rm = 1; end
      join
      #1;
      e = (dm - ds) / LSB;                         // both multiples of 1 ps
      if ((dm - ds) % LSB != 0) begin
        if (2 * ((dm - ds) % LSB) >= LSB)  e = e + 1;
        if (2 * ((dm - ds) % LSB) <= -LSB) e = e - 1;
      end
      if (e > DMAX) begin e = DMAX; n_sat++; end
      if (e < -DMAX) e = -DMAX;
      if (e < 0) n_neg++;
      if (e > 0) n_pos++;
      checks++;
      if (int'(dc) != e) begin failures++; $display("FAIL ts=%0d tm=%0d dc=%0d expected %0d", ds, dm, dc, e); end
      rs = 0; rm = 0;
      #200;
      checks++;
      if (int'(dc) != e) begin failures++; $display("FAIL dc not held"); end
    end
    checks += 3;
    if (n_neg == 0) begin failures++; $display("FAIL no negative code"); end
    if (n_pos == 0) begin failures++; $display("FAIL no positive code"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
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
