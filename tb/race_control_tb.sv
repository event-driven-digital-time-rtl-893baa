`timescale 1ps/1ps
// race_control_tb: the testbench plays the delay paths and the arbiter.
// A 50 ps fire2 pulse must raise race_dr and race_dr must stay high until
// the last of the six S/M rails arrives, then fall; race_sr must rise at
// that same instant; race_sr must stay high until the grant has arrived and
// the rails have returned to zero; sr_done must rise only when the grant is
// there and every race_class line has arrived, and fall only when every
// line (the losers' ones outlast the winner's) is back at zero. The rail
// arrival order and the moment of the grant are random (grant before or
// after the rails return, both orders are exercised).
module race_control_tb;
  localparam int NK = tm_pkg::NUM_CLASS;
  logic          rst, fire2, race_dr, race_sr, dr_done, sr_done;
  logic [NK-1:0] rs, rm, rc, grant;
  int checks = 0, failures = 0, n_grant_first = 0, n_rails_first = 0, n_late_loser = 0;

  race_control dut (.rst(rst), .fire2(fire2), .race_s(rs), .race_m(rm), .race_class(rc), .grant(grant),
                    .race_dr(race_dr), .race_sr(race_sr), .dr_done(dr_done), .sr_done(sr_done));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    int d [2*NK];
    int dmax, dg, dfall;
    logic [NK-1:0] w;
    int wi;
    rst = 0; fire2 = 0; rs = '0; rm = '0; rc = '0; grant = '0;
    #5 rst = 1;
    #5 rst = 0;
    #100;
    for (int t = 0; t < 300; t++) begin
      dmax = 0;
      for (int i = 0; i < 2*NK; i++) begin
        d[i] = $urandom_range(60, 600);
        if (d[i] > dmax) dmax = d[i];
      end
      fire2 = 1;
      #1 chk(race_dr == 1, "race_dr did not rise with fire2");
      #49 fire2 = 0;
      #1 chk(race_dr == 1, "race_dr did not hold after fire2 fell");
      for (int i = 0; i < 2*NK; i++) begin
        automatic int ii = i;
        fork begin #(d[ii] - 51) if (ii < NK) rs[ii] = 1'b1; else rm[ii-NK] = 1'b1; end join_none
      end
      #(dmax - 52);
      chk(race_dr == 1 && race_sr == 0, "race_dr fell or race_sr rose before the last rail");
      #2;
      chk(race_dr == 0 && race_sr == 1 && dr_done == 1, "no hand-over at the last rail");
      // Rails return to zero after race_dr fell; the grant comes at a random time.
      dfall = $urandom_range(20, 300);
      dg    = $urandom_range(5, 400);
      if (dg < dfall) n_grant_first++; else n_rails_first++;
      fork
        begin #(dfall) rs = '0; rm = '0; end
        begin
          #(dg) wi = $urandom_range(0, NK - 1); w = NK'(1 << wi);
          rc = w;                                // the winner has arrived
          #1 chk(sr_done == 0, "sr_done rose before the grant");
          grant = w;
          #($urandom_range(1, 30));
          rc = ~NK'(1 << ((wi + 1) % NK));        // all but one loser have arrived
          #1 chk(sr_done == 0, "sr_done rose before every RaceClass arrived");
          rc = '1;
        end
      join
      #1;
      chk(sr_done == 1, "sr_done does not follow grant");
      chk(race_sr == 0, "race_sr did not fall after grant and rail return");
      // The winner's line and grant drop first; losers' lines drop later.
      #20 rc = rc & ~w; grant = '0;
      #1 chk(sr_done == 1, "sr_done fell before every RaceClass line returned");
      n_late_loser++;
      #30 rc = '0;
      #1 chk(sr_done == 0 && race_dr == 0 && race_sr == 0, "not back at rest");
      #50;
    end
    chk(n_grant_first > 0 && n_rails_first > 0, "both release orders");
    chk(n_late_loser > 0, "no losing line outlasted the winner");
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
