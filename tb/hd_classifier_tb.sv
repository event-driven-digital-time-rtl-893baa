`timescale 1ps/1ps
// hd_classifier_tb: the multi-class TM classifier alone at its default size
// (3 classes, 4 clauses per class: clauses 0-1 positive, 2-3 negative).
// The testbench plays the last click stage: it sets random clause outputs,
// pulses fire2 and waits for req_out. For each inference it checks
//   - target_class against argmax of (positive fired - negative fired),
//     lowest index on a tie;
//   - the time from fire2 to the rising grant:
//     T_CELL + (smallest Hamming distance) * HD_UNIT + T_MUTEX;
//   - one req_out toggle per inference, with grant back to zero after it.
// Ties and every class winning must each happen at least once.
module hd_classifier_tb;
  localparam int NK  = tm_pkg::NUM_CLASS;
  localparam int CPC = tm_pkg::NUM_CLAUSE / tm_pkg::NUM_CLASS;
  localparam int NPOS = (CPC + 1) / 2;
  localparam int U = tm_pkg::HD_UNIT_PS, TC = tm_pkg::T_CELL_PS, TM = tm_pkg::T_MUTEX_PS;
  localparam int NTOK = 300;

  logic                    rst, fire2, req_out;
  logic [NK-1:0][CPC-1:0]  cv;
  logic [1:0]              tc;
  logic [NK-1:0]           grant;
  int checks = 0, failures = 0, n_tie = 0;
  int n_win [NK];

  hd_classifier dut (.rst(rst), .fire2(fire2), .clause_vector(cv), .req_out(req_out),
                     .target_class(tc), .grant(grant));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int score, best, bestscore, hd, exp_lat;
    time t_fire;
    logic r;
    rst = 0; fire2 = 0; cv = '0;
    #5 rst = 1;
    #5 rst = 0;
    #100;
    for (int t = 0; t < NTOK; t++) begin
      cv = (NK*CPC)'($urandom);
      best = 0; bestscore = -1000;
      for (int c = 0; c < NK; c++) begin
        score = 0;
        for (int j = 0; j < CPC; j++) score += (j < NPOS) ? int'(cv[c][j]) : -int'(cv[c][j]);
        if (score == bestscore) n_tie++;
        if (score > bestscore) begin bestscore = score; best = c; end
      end
      hd = (CPC - NPOS) - bestscore;          // mismatches of the best class
      exp_lat = TC + hd * U + TM;
      r = req_out;
      #200;
      fire2 = 1; t_fire = $time;
      fork #50 fire2 = 0; join_none      // the grant may come before fire2 falls
      @(posedge |grant);
      chk($time - t_fire == exp_lat, $sformatf("token %0d latency %0t expected %0d", t, $time - t_fire, exp_lat));
      wait (req_out != r);
      chk(int'(tc) == best, $sformatf("token %0d class %0d expected %0d", t, tc, best));
      chk(grant == '0, "grant still high after req_out");
      n_win[best]++;
    end
    chk(n_tie > 0, "no tie between classes");
    for (int c = 0; c < NK; c++) chk(n_win[c] > 0, $sformatf("class %0d never won", c));
    $display("ties=%0d wins=%0d/%0d/%0d", n_tie, n_win[0], n_win[1], n_win[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Grant one-hot.
  always @(grant) if (!rst) chk($onehot0(grant), $sformatf("grant %b not one-hot", grant));

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
