`timescale 1ps/1ps
// hd_classifier: time-domain classification of a multi-class Tsetlin
// Machine, where every clause belongs to one class with a fixed polarity.
//
// The class decision is argmax over classes of (positive clauses that fired
// - negative clauses that fired). With the same number of clauses of each
// polarity this is the class with the smallest Hamming distance between
// its clause outputs and the pattern "positive clauses 1, negative clauses
// 0". Each clause is therefore XORed with its polarity into a mismatch bit;
// on fire2 the mismatch bits are registered and a four-phase race starts:
//   race = C(fire2, not done)       launches every class at once,
//   hd_delay_line                   delays each class by its distance,
//   wta_mesh                        grants the first arrival (one-hot;
//                                   wta_tree instead when WTA_TREE = 1),
//   done = C(any grant, C(all lines))  once the winner is granted and
//                                   every line has arrived, race returns
//                                   to zero; done falls when all lines
//                                   and grants are low,
//   phase_interface                 captures target_class on done rising
//                                   and toggles req_out on done falling.
// Interface and timing are those of cotm_classifier: fire2 is the last
// click pulse, req_out toggles once per classification with target_class
// valid. fire2 to grant takes T_CELL + min_distance * HD_UNIT + T_MUTEX
// with the mesh arbiter (ceil(log2 NUM_CLASS) mutex delays with the tree);
// a tie goes to the lower class index.
// The Hamming-distance view, the WTA and the four-to-two phase interface
// follow the published design; the clause order inside a class (first
// half positive, second half negative, as in the classification equation)
// and all delays are this design's choices.
module hd_classifier #(
  parameter int NUM_CLASS        = tm_pkg::NUM_CLASS,
  parameter int CLAUSE_PER_CLASS = tm_pkg::NUM_CLAUSE / tm_pkg::NUM_CLASS,
  parameter int HD_UNIT_PS       = tm_pkg::HD_UNIT_PS,
  parameter bit WTA_TREE         = 1'b0,
  parameter int CLS_W            = (NUM_CLASS > 1) ? $clog2(NUM_CLASS) : 1
) (
  input  logic                                         rst,
  input  logic                                         fire2,
  input  logic [NUM_CLASS-1:0][CLAUSE_PER_CLASS-1:0]   clause_vector,
  output logic                                         req_out,
  output logic [CLS_W-1:0]                             target_class,
  output logic [NUM_CLASS-1:0]                         grant
);

  localparam int NPOS = (CLAUSE_PER_CLASS + 1) / 2;   // clauses 0..NPOS-1 vote for

  logic [NUM_CLASS-1:0][CLAUSE_PER_CLASS-1:0] mismatch_d, mismatch_q;
  logic [NUM_CLASS-1:0]                       race_class;
  logic                                       race, done;

  // A positive clause agrees when it fires, a negative one when it does not.
  always_comb begin
    for (int c = 0; c < NUM_CLASS; c++)
      for (int j = 0; j < CLAUSE_PER_CLASS; j++)
        mismatch_d[c][j] = (j < NPOS) ? ~clause_vector[c][j] : clause_vector[c][j];
  end

  pipe_reg #(.W(NUM_CLASS * CLAUSE_PER_CLASS)) u_reg2 (
    .rst(rst), .fire(fire2), .d(mismatch_d), .q(mismatch_q)
  );

  muller_c #(.N(2)) u_c_race (
    .rst(rst), .in({fire2, ~done}), .c(race)
  );

  for (genvar c = 0; c < NUM_CLASS; c++) begin : g_line
    hd_delay_line #(.N(CLAUSE_PER_CLASS), .UNIT_PS(HD_UNIT_PS)) u_line (
      .race_in(race), .mismatch(mismatch_q[c]), .race_out(race_class[c])
    );
  end

  if (WTA_TREE) begin : g_tree
    wta_tree #(.NUM_CLASS(NUM_CLASS)) u_wta (
      .race_class(race_class), .grant(grant)
    );
  end else begin : g_mesh
    wta_mesh #(.NUM_CLASS(NUM_CLASS)) u_wta (
      .race_class(race_class), .grant(grant)
    );
  end

  // done: the winner is granted and every class pulse has left its line;
  // it falls when all lines and grants are back at zero. Waiting for the
  // slowest class keeps a pulse still inside a line out of the next race.
  logic all_arrived;

  muller_c #(.N(NUM_CLASS)) u_c_all (
    .rst(rst), .in(race_class), .c(all_arrived)
  );

  muller_c #(.N(2)) u_c_done (
    .rst(rst), .in({|grant, all_arrived}), .c(done)
  );

  phase_interface #(.NUM_CLASS(NUM_CLASS), .CLS_W(CLS_W)) u_if (
    .rst(rst), .sr_done(done), .grant(grant), .req_out(req_out), .target_class(target_class)
  );

endmodule
