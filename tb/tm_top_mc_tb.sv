`timescale 1ps/1ps
// tm_top_mc_tb: end-to-end test of the pipeline with the multi-class TM
// classifier (tm_top with COALESCED = 0), Iris-sized: 16 features, 3
// classes and 12 clauses per class, so NUM_CLAUSE = 36. Clause j belongs to
// class j / 12; within a class the first 6 clauses vote for it and the last
// 6 against. The tree arbiter is selected (WTA_TREE = 1), so this test
// also runs that arbiter inside the full pipeline; the mesh is covered by
// tm_top_tb.
//
// A random model (sparse automaton includes) is applied. A two-phase
// producer streams NTOK random feature vectors, sometimes pausing long
// enough for the pipeline to drain; a two-phase consumer takes each result,
// sometimes after a long pause so that the pipeline backs up. Each
// target_class is compared with a reference computed here: literals,
// clauses, and the class with the most (positive fired - negative fired),
// lowest index on a tie. Mechanisms that must each occur at least once:
// a back-pressure stall, two samples in flight, a drained pipeline, a tie
// between best classes and a win by every class.
module tm_top_mc_tb;

  localparam int NF   = tm_pkg::NUM_FEATURE;
  localparam int NK   = tm_pkg::NUM_CLASS;
  localparam int CPC  = 12;
  localparam int NC   = NK * CPC;
  localparam int WM   = tm_pkg::WMAG_W;
  localparam int CW   = $clog2(NK);
  localparam int NTOK = 400;

  logic                          rst;
  logic                          req_in, ack_out, req_out, ack_in;
  logic [NF-1:0]                 feature;
  logic [NC-1:0][2*NF-1:0]       ta_exclude;
  logic [NK-1:0][NC-1:0]         weight_neg;
  logic [NK-1:0][NC-1:0][WM-1:0] weight_mag;
  logic [CW-1:0]                 target_class;
  logic [NK-1:0]                 grant;

  tm_top #(.NUM_CLAUSE(NC), .COALESCED(1'b0), .WTA_TREE(1'b1)) dut (
    .rst(rst), .req_in(req_in), .ack_out(ack_out), .feature(feature),
    .ta_exclude(ta_exclude), .weight_neg(weight_neg), .weight_mag(weight_mag),
    .req_out(req_out), .ack_in(ack_in), .target_class(target_class), .grant(grant)
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_drain = 0, n_ties = 0;
  int n_win [NK];
  int expq [$];
  int sent = 0, recvd = 0;
  bit done = 0;

  function automatic int reference(logic [NF-1:0] x);
    logic [2*NF-1:0] lit;
    logic [NC-1:0]   cl;
    int score, best, bestscore;
    for (int i = 0; i < NF; i++) begin
      lit[2*i] = x[i]; lit[2*i+1] = !x[i];
    end
    for (int j = 0; j < NC; j++) begin
      cl[j] = 1'b1;
      for (int l = 0; l < 2*NF; l++)
        if (!ta_exclude[j][l] && !lit[l]) cl[j] = 1'b0;
    end
    best = 0; bestscore = -1000;
    for (int c = 0; c < NK; c++) begin
      score = 0;
      for (int j = 0; j < CPC; j++)
        score += (j < CPC / 2) ? int'(cl[c*CPC + j]) : -int'(cl[c*CPC + j]);
      if (score == bestscore) n_ties++;
      if (score > bestscore) begin bestscore = score; best = c; end
    end
    return best;
  endfunction

  // ---------------- producer ----------------
  initial begin
    rst = 1'b0; req_in = 1'b0; ack_in = 1'b0; feature = '0;
    weight_neg = '0; weight_mag = '0;
    #10 rst = 1'b1;
    for (int j = 0; j < NC; j++)
      for (int l = 0; l < 2*NF; l++)
        ta_exclude[j][l] = ($urandom_range(0, 15) != 0);   // ~2 literals per clause
    #1000 rst = 1'b0;
    #500;
    for (int t = 0; t < NTOK; t++) begin
      feature = NF'($urandom);
      expq.push_back(reference(feature));
      if (sent > recvd) n_overlap++;
      sent++;
      #10 req_in = !req_in;
      wait (ack_out == req_in);
      if ($urandom_range(0, 7) == 0) begin
        #($urandom_range(3000, 6000));   // let the pipeline drain
        n_drain++;
      end else #($urandom_range(0, 300));
    end
  end

  // ---------------- consumer ----------------
  initial begin
    int exp_c;
    #1100;  // past the reset pulse
    while (recvd < NTOK) begin
      wait (req_out != ack_in);
      exp_c = expq.pop_front();
      checks++;
      if (int'(target_class) != exp_c) begin
        failures++;
        $display("FAIL token %0d: target_class=%0d expected=%0d", recvd, target_class, exp_c);
      end
      n_win[exp_c]++;
      recvd++;
      if ($urandom_range(0, 7) == 0) #($urandom_range(3000, 8000));
      else                           #($urandom_range(0, 200));
      ack_in = !ack_in;
    end
    done = 1;
  end

  always @(dut.u_ctrl.req_i or dut.u_ctrl.ack_i) begin
    for (int s = 0; s < 3; s++)
      if ((dut.u_ctrl.req_i[s] != dut.u_ctrl.req_o[s]) && (dut.u_ctrl.ack_i[s] != dut.u_ctrl.ack_o[s]))
        n_stall++;
  end

  always @(grant) if (!rst) begin
    checks++;
    if (!$onehot0(grant)) begin failures++; $display("FAIL grant not one-hot %b", grant); end
  end

  initial begin
    wait (done);
    #2000;
    checks++;
    if (sent != NTOK || recvd != NTOK) begin failures++; $display("FAIL sent %0d recvd %0d", sent, recvd); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no back-pressure stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL never two tokens in flight"); end
    checks++; if (n_drain == 0)   begin failures++; $display("FAIL pipeline never drained"); end
    checks++; if (n_ties == 0)    begin failures++; $display("FAIL no tie between classes"); end
    for (int c = 0; c < NK; c++) begin
      checks++;
      if (n_win[c] == 0) begin failures++; $display("FAIL class %0d never won", c); end
    end
    $display("stalls=%0d overlap=%0d drain=%0d ties=%0d wins=%0d/%0d/%0d time=%0t",
             n_stall, n_overlap, n_drain, n_ties, n_win[0], n_win[1], n_win[2], $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd2_000_000_000);
    failures++;
    $display("FAIL watchdog: sent %0d recvd %0d", sent, recvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
