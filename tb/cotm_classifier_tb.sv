`timescale 1ps/1ps
// cotm_classifier_tb: the classifier alone at its default size, with a
// random model and random clause vectors applied ahead of each fire2 pulse
// (the testbench plays the last click stage and acknowledges every result).
// For each inference it checks:
//   - target_class against a reference that recomputes S, M, the (k, f)
//     codes and the largest code difference (lowest index on a tie);
//   - the time from fire2 to the rising grant, which must be
//       T_CELL + max over the six rails of (k*tau + f*tau/2**e)
//       + T_CELL + (DC_MAX - dc_winner) * UNIT + T_MUTEX;
//   - one req_out toggle per inference.
// The first inference is also the worked example of the published
// classifier figure: weights (-3,-2,1,4), (3,0,2,-4), (-3,1,4,3) on four
// clauses with clause vector 1001 give sums 1, -1, 0 and class 0.
module cotm_classifier_tb;
  localparam int NC = tm_pkg::NUM_CLAUSE, NK = tm_pkg::NUM_CLASS, WM = tm_pkg::WMAG_W;
  localparam int E = tm_pkg::E_BITS, TAU = tm_pkg::TAU_PS, TC = tm_pkg::T_CELL_PS;
  localparam int U = tm_pkg::DCDE_UNIT_PS, TM = tm_pkg::T_MUTEX_PS;
  localparam int DMAX = (1 << (tm_pkg::DC_W - 1)) - 1;
  localparam int NTOK = 300;

  logic                          rst, fire2, req_out;
  logic [NC-1:0]                 cv;
  logic [NK-1:0][NC-1:0]         wn;
  logic [NK-1:0][NC-1:0][WM-1:0] wm;
  logic [1:0]                    tc;
  logic [NK-1:0]                 grant;
  int checks = 0, failures = 0, n_exact_agree = 0;

  cotm_classifier dut (.rst(rst), .fire2(fire2), .clause_vector(cv), .weight_neg(wn), .weight_mag(wm),
                       .req_out(req_out), .target_class(tc), .grant(grant));

  function automatic int code(int v);   // 2**E * k + f
    int k;
    k = 0;
    while ((2 << k) <= v) k++;
    return (v == 0) ? 0 : k * (1 << E) + ((v - (1 << k)) * (1 << E)) / (1 << k);
  endfunction

  task automatic set_weight(int c, int j, int w);
    wn[c][j] = (w < 0);
    wm[c][j] = WM'((w < 0) ? -w : w);
  endtask

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int s, m, key, best, bestkey, exact, bestexact, eidx, maxc, exp_lat;
    time t_fire;
    logic r;
    rst = 0; fire2 = 0; cv = '0; wn = '0; wm = '0;
    #5 rst = 1;
    #5 rst = 0;
    #100;
    for (int t = 0; t < NTOK; t++) begin
      if (t == 0) begin
        set_weight(0, 0, -3); set_weight(0, 1, -2); set_weight(0, 2, 1); set_weight(0, 3, 4);
        set_weight(1, 0,  3); set_weight(1, 1,  0); set_weight(1, 2, 2); set_weight(1, 3, -4);
        set_weight(2, 0, -3); set_weight(2, 1,  1); set_weight(2, 2, 4); set_weight(2, 3, 3);
        cv = NC'(4'b1001);
      end else begin
        for (int c = 0; c < NK; c++)
          for (int j = 0; j < NC; j++) set_weight(c, j, $urandom_range(0, 30) - 15);
        cv = NC'($urandom);
      end
      // Reference.
      best = 0; bestkey = -1000; bestexact = -1000; eidx = 0; maxc = 0;
      for (int c = 0; c < NK; c++) begin
        s = 0; m = 0;
        for (int j = 0; j < NC; j++)
          if (cv[j]) begin if (wn[c][j]) s += int'(wm[c][j]); else m += int'(wm[c][j]); end
        if (code(s) > maxc) maxc = code(s);
        if (code(m) > maxc) maxc = code(m);
        key = code(m) - code(s);
        if (key > bestkey) begin bestkey = key; best = c; end
        exact = m - s;
        if (exact > bestexact) begin bestexact = exact; eidx = c; end
      end
      if (t == 0) chk(best == 0 && eidx == 0, "worked example reference is not class 0");
      if (eidx == best) n_exact_agree++;
      exp_lat = TC + (maxc * TAU) / (1 << E) + TC + (DMAX - bestkey) * U + TM;
      r = req_out;
      #200;
      fire2 = 1; t_fire = $time;
      #50 fire2 = 0;
      @(posedge |grant);
      chk($time - t_fire == exp_lat, $sformatf("token %0d latency %0t expected %0d", t, $time - t_fire, exp_lat));
      wait (req_out != r);
      chk(int'(tc) == best, $sformatf("token %0d class %0d expected %0d", t, tc, best));
    end
    $display("log-domain decision agrees with exact argmax on %0d of %0d", n_exact_agree, NTOK);
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
