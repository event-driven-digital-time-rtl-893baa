`timescale 1ps/1ps
// tm_top_tb: end-to-end test of the event-driven CoTM pipeline at its
// default (Iris-sized) parameters: 16 features, 12 clauses, 3 classes.
//
// A random trained model (sparse automaton includes, random sign-magnitude
// weights) is applied, redrawn until every class wins part of a trial batch. A two-phase producer streams NTOK random feature
// vectors; a two-phase consumer takes each result, sometimes after a long
// pause so that the pipeline backs up. Each target_class is compared with a
// reference computed here from the model alone: literals, clauses,
// positive/negative weight sums, the logarithmic (k, f) code of each sum
// (k = floor(log2 v), f = floor((v - 2**k) * 2**E / 2**k)), and the class
// with the largest code difference, lowest index on a tie.
//
// Mechanisms that must each occur at least once (a failure otherwise):
// a back-pressure stall at a click stage, several tokens in flight, a
// drained pipeline (the producer pauses longer than the latency), both
// LOD normalisation directions (k >= e and k < e), a class whose negative
// rail dominates (negative code) and one whose positive rail does, and a
// win by every class. The agreement of the log-domain decision with the
// exact argmax of the integer class sums is printed for information.
module tm_top_tb;

  localparam int NF   = tm_pkg::NUM_FEATURE;
  localparam int NC   = tm_pkg::NUM_CLAUSE;
  localparam int NK   = tm_pkg::NUM_CLASS;
  localparam int WM   = tm_pkg::WMAG_W;
  localparam int E    = tm_pkg::E_BITS;
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

  tm_top dut (
    .rst(rst), .req_in(req_in), .ack_out(ack_out), .feature(feature),
    .ta_exclude(ta_exclude), .weight_neg(weight_neg), .weight_mag(weight_mag),
    .req_out(req_out), .ack_in(ack_in), .target_class(target_class), .grant(grant)
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_lod_right = 0, n_lod_left = 0;
  int n_neg = 0, n_pos = 0, n_exact_agree = 0, n_ties = 0, n_drain = 0;
  int n_win [NK];
  int expq [$];
  int sent = 0, recvd = 0;
  bit done = 0;

  // ---------------- reference model ----------------
  function automatic int log_code(int v);
    int k, f;
    k = 0;
    while ((2 << k) <= v) k++;          // floor(log2 v), 0 for v <= 1
    if (v == 0) f = 0;
    else        f = ((v - (1 << k)) * (1 << E)) / (1 << k);
    if (k >= E) n_lod_right++; else n_lod_left++;
    return k * (1 << E) + f;
  endfunction

  function automatic int reference(logic [NF-1:0] x);
    logic [2*NF-1:0] lit;
    logic [NC-1:0]   cl;
    int s, m, key, best, bestkey, exact, bestexact, exact_idx;
    for (int i = 0; i < NF; i++) begin
      lit[2*i] = x[i]; lit[2*i+1] = !x[i];
    end
    for (int j = 0; j < NC; j++) begin
      cl[j] = 1'b1;
      for (int l = 0; l < 2*NF; l++)
        if (!ta_exclude[j][l] && !lit[l]) cl[j] = 1'b0;
    end
    best = 0; bestkey = -1000; bestexact = -100000; exact_idx = 0;
    for (int c = 0; c < NK; c++) begin
      s = 0; m = 0;
      for (int j = 0; j < NC; j++)
        if (cl[j]) begin
          if (weight_neg[c][j]) s += int'(weight_mag[c][j]);
          else                  m += int'(weight_mag[c][j]);
        end
      key = log_code(m) - log_code(s);
      if (key < 0) n_neg++;
      if (key > 0) n_pos++;
      if (key == bestkey) n_ties++;
      if (key > bestkey) begin bestkey = key; best = c; end
      exact = m - s;
      if (exact > bestexact) begin bestexact = exact; exact_idx = c; end
    end
    if (exact_idx == best) n_exact_agree++;
    return best;
  endfunction

  // ---------------- model ----------------
  task automatic make_model();
    for (int j = 0; j < NC; j++)
      for (int l = 0; l < 2*NF; l++)
        ta_exclude[j][l] = ($urandom_range(0, 15) != 0);   // ~2 literals per clause
    for (int c = 0; c < NK; c++)
      for (int j = 0; j < NC; j++) begin
        weight_neg[c][j] = 1'($urandom_range(0, 1));
        weight_mag[c][j] = WM'($urandom_range(0, (1 << WM) - 1));
      end
  endtask

  // ---------------- producer ----------------
  initial begin
    rst = 1'b0; req_in = 1'b0; ack_in = 1'b0; feature = '0;
    #10 rst = 1'b1;
    // Draw models until a trial batch of samples is won by every class, so
    // that the coverage checks below do not hinge on a lopsided model.
    for (int tries = 0; tries < 100; tries++) begin
      int w [NK];
      bit all_win;
      make_model();
      w = '{default: 0};
      for (int i = 0; i < 200; i++) w[reference(NF'($urandom))]++;
      all_win = 1;
      for (int c = 0; c < NK; c++) if (w[c] == 0) all_win = 0;
      if (all_win) break;
    end
    n_lod_right = 0; n_lod_left = 0; n_neg = 0; n_pos = 0; n_ties = 0; n_exact_agree = 0;
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

  // Back-pressure: a stage holds a new request while its acknowledge is outstanding.
  always @(dut.u_ctrl.req_i or dut.u_ctrl.ack_i) begin
    for (int s = 0; s < 3; s++)
      if ((dut.u_ctrl.req_i[s] != dut.u_ctrl.req_o[s]) && (dut.u_ctrl.ack_i[s] != dut.u_ctrl.ack_o[s]))
        n_stall++;
  end

  // Result must be one-hot while valid.
  always @(grant) if (!rst) begin
    checks++;
    if (!$onehot0(grant)) begin failures++; $display("FAIL grant not one-hot %b", grant); end
  end

  initial begin
    wait (done);
    #2000;
    checks++;
    if (sent != NTOK || recvd != NTOK) begin failures++; $display("FAIL sent %0d recvd %0d", sent, recvd); end
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL no back-pressure stall"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("FAIL never two tokens in flight"); end
    checks++; if (n_drain == 0)     begin failures++; $display("FAIL pipeline never drained"); end
    checks++; if (n_lod_right == 0) begin failures++; $display("FAIL LOD k>=e never seen"); end
    checks++; if (n_lod_left == 0)  begin failures++; $display("FAIL LOD k<e never seen"); end
    checks++; if (n_neg == 0)       begin failures++; $display("FAIL no negative class code"); end
    checks++; if (n_pos == 0)       begin failures++; $display("FAIL no positive class code"); end
    for (int c = 0; c < NK; c++) begin
      checks++;
      if (n_win[c] == 0) begin failures++; $display("FAIL class %0d never won", c); end
    end
    $display("stalls=%0d overlap=%0d lod_right=%0d lod_left=%0d neg=%0d pos=%0d ties=%0d wins=%0d/%0d/%0d exact_argmax_agree=%0d/%0d time=%0t",
             n_stall, n_overlap, n_lod_right, n_lod_left, n_neg, n_pos, n_ties,
             n_win[0], n_win[1], n_win[2], n_exact_agree, NTOK, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #(64'd2_000_000_000);
    failures++;
    $display("FAIL watchdog: sent %0d recvd %0d", sent, recvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
