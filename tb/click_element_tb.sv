`timescale 1ps/1ps
// click_element_tb: a single click stage driven by a two-phase source and
// sink. Checks: each new request with the previous output acknowledged gives
// exactly one fire pulse of width T_CQ_PS, after which req_out and ack_out
// both carry the new phase; a request arriving while the acknowledge is
// outstanding does not fire (stall) until ack_in arrives.
module click_element_tb;
  localparam int TCQ = tm_pkg::T_CQ_PS;
  logic rst, req_in, ack_in, req_out, ack_out, fire;
  int checks = 0, failures = 0, n_fire = 0, n_stall = 0;
  time t_rise = 0;
  bit  armed = 0;

  click_element dut (.rst(rst), .req_in(req_in), .ack_in(ack_in), .req_out(req_out), .ack_out(ack_out), .fire(fire));

  always @(posedge fire) if (armed) begin n_fire++; t_rise = $time; end
  always @(negedge fire) if (armed) begin
    checks++;
    if ($time - t_rise != TCQ) begin failures++; $display("FAIL fire width %0t", $time - t_rise); end
  end

  initial begin
    int nf;
    rst = 0; req_in = 0; ack_in = 0;
    #5 rst = 1;
    #10 rst = 0;
    #(4 * TCQ);
    armed = 1;
    checks++; if (req_out || ack_out || fire) begin failures++; $display("FAIL after reset"); end
    for (int t = 0; t < 200; t++) begin
      nf = n_fire;
      req_in = !req_in;
      #(TCQ + 10);
      checks += 3;
      if (n_fire != nf + 1) begin failures++; $display("FAIL token %0d: %0d fires", t, n_fire - nf); end
      if (req_out != req_in) begin failures++; $display("FAIL req_out not updated"); end
      if (ack_out != req_in) begin failures++; $display("FAIL ack_out not updated"); end
      if ($urandom_range(0, 2) == 0) begin
        // Stall: offer the next request before acknowledging this one.
        nf = n_fire;
        req_in = !req_in;
        #(TCQ * 3);
        checks++;
        if (n_fire != nf) begin failures++; $display("FAIL fired while ack outstanding"); end
        n_stall++;
        ack_in = !ack_in;      // release: the waiting request fires now
        #(TCQ + 10);
        checks++;
        if (n_fire != nf + 1 || req_out != req_in) begin failures++; $display("FAIL no fire after ack"); end
      end
      ack_in = !ack_in;
      #20;
    end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL stall never exercised"); end
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
