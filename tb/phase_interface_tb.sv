`timescale 1ps/1ps
// phase_interface_tb: random one-hot grants framed by sr_done pulses.
// target_class must take the index of the grant when sr_done rises, and
// req_out must toggle exactly once per cycle, when sr_done falls.
module phase_interface_tb;
  localparam int NK = tm_pkg::NUM_CLASS;
  logic          rst, sr_done, req_out;
  logic [NK-1:0] grant;
  logic [1:0]    tc;
  int checks = 0, failures = 0;

  phase_interface dut (.rst(rst), .sr_done(sr_done), .grant(grant), .req_out(req_out), .target_class(tc));

  initial begin
    int w;
    logic r;
    rst = 0; sr_done = 0; grant = '0;
    #5 rst = 1;
    #5 checks++; if (req_out || tc != 0) begin failures++; $display("FAIL reset"); end
    rst = 0;
    for (int t = 0; t < 300; t++) begin
      w = $urandom_range(0, NK - 1);
      r = req_out;
      grant = NK'(1 << w);
      #1 sr_done = 1;
      #10;
      checks += 2;
      if (int'(tc) != w) begin failures++; $display("FAIL tc=%0d exp %0d", tc, w); end
      if (req_out != r)  begin failures++; $display("FAIL req_out toggled on rising sr_done"); end
      grant = '0;
      #1 sr_done = 0;
      #10;
      checks += 2;
      if (req_out == r) begin failures++; $display("FAIL req_out did not toggle"); end
      if (int'(tc) != w) begin failures++; $display("FAIL tc not held"); end
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
