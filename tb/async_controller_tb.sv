`timescale 1ps/1ps
// async_controller_tb: the three-stage click pipeline with a two-phase
// source and a sink that acknowledges late at times.
// Checks: fire0, fire1, fire2 each pulse once per token and in order; with
// a free pipeline fire1 follows fire0 by T_CQ + delay and fire2 follows
// fire1 by the same; req_out toggles once per token; with the sink holding
// its acknowledge at most three tokens enter (the pipeline fills and
// stalls), and all of them come out once it acknowledges.
module async_controller_tb;
  localparam int TCQ = tm_pkg::T_CQ_PS, D = tm_pkg::MATCH_DELAY_PS;
  localparam int NTOK = 200;
  logic       rst, req_in, ack_out, req_out, ack_in;
  logic [2:0] fire;
  int checks = 0, failures = 0, n_fire [3], n_out = 0, n_full = 0;
  time t_f [3];
  bit  armed = 0;

  async_controller dut (.rst(rst), .req_in(req_in), .ack_out(ack_out), .req_out(req_out), .ack_in(ack_in), .fire(fire));

  for (genvar s = 0; s < 3; s++) begin : g_mon
    always @(posedge fire[s]) if (armed) begin
      n_fire[s]++;
      t_f[s] = $time;
      if (s > 0) begin
        checks++;
        if (n_fire[s] > n_fire[s-1]) begin failures++; $display("FAIL fire%0d overtook fire%0d", s, s-1); end
      end
    end
  end

  always @(req_out) if (armed) n_out++;

  // Free-running check of the stage-to-stage latency.
  initial begin
    rst = 0; req_in = 0; ack_in = 0;
    #5 rst = 1;
    #10 rst = 0;
    #(4 * TCQ);
    armed = 1;
    req_in = 1;
    #(3 * (TCQ + D));
    checks += 2;
    if (t_f[1] - t_f[0] != TCQ + D) begin failures++; $display("FAIL fire0->fire1 %0t", t_f[1] - t_f[0]); end
    if (t_f[2] - t_f[1] != TCQ + D) begin failures++; $display("FAIL fire1->fire2 %0t", t_f[2] - t_f[1]); end
    ack_in = !ack_in;
    #100;
    // Fill: sink holds its acknowledge, source keeps offering.
    for (int t = 0; t < 4; t++) begin
      req_in = !req_in;
      #(4 * (TCQ + D));
      if (ack_out == req_in) n_full++;
      else break;                     // this token waits at the input
    end
    checks++;
    if (n_full != 3) begin failures++; $display("FAIL %0d tokens entered a blocked pipeline, expected 3", n_full); end
    checks++;
    if (n_fire[2] != 2) begin failures++; $display("FAIL fire2 count %0d while blocked", n_fire[2]); end
    // Drain by acknowledging; the source's waiting token then enters too.
    for (int t = 0; t < 3; t++) begin
      ack_in = !ack_in;
      #(4 * (TCQ + D));
    end
    checks++;
    if (n_fire[0] != 5 || n_fire[2] != 5) begin failures++; $display("FAIL after drain fire0=%0d fire2=%0d", n_fire[0], n_fire[2]); end
    // Random streaming.
    fork
      for (int t = 0; t < NTOK; t++) begin
        wait (ack_out == req_in);
        #($urandom_range(0, 500));
        req_in = !req_in;
      end
      for (int t = 0; t < NTOK + 1; t++) begin
        wait (req_out != ack_in);
        #($urandom_range(0, 1500));
        ack_in = !ack_in;
      end
    join
    #2000;
    checks += 3;
    if (n_fire[0] != NTOK + 5 || n_fire[1] != NTOK + 5 || n_fire[2] != NTOK + 5) begin
      failures++; $display("FAIL fire counts %0d %0d %0d", n_fire[0], n_fire[1], n_fire[2]);
    end
    if (n_out != NTOK + 5) begin failures++; $display("FAIL req_out toggles %0d", n_out); end
    if (req_out != ack_in) begin failures++; $display("FAIL unacknowledged output at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
