`timescale 1ps/1ps
// wta_mesh: mesh-like winner-takes-all arbiter over NUM_CLASS race signals.
//
// Every pair of classes (i, j), i < j, shares one mutex, NUM_CLASS *
// (NUM_CLASS - 1) / 2 of them in all (3 for three classes). A class is
// granted when it has won every mutex it takes part in. The first race
// signal to rise wins all of its mutexes and is granted; every later one
// has lost at least one mutex to it, so grant is one-hot. When the race
// signals return to zero the mutexes release and the grant falls.
// The pairwise mesh of mutexes and its cell count follow the published
// arbiter; how the pairwise wins are combined (an AND per class) is this
// design's choice. Latency: one mutex plus one AND gate.
module wta_mesh #(
  parameter int NUM_CLASS = tm_pkg::NUM_CLASS
) (
  input  logic [NUM_CLASS-1:0] race_class,
  output logic [NUM_CLASS-1:0] grant
);

  // win[i][j]: class i holds the mutex it shares with class j.
  logic [NUM_CLASS-1:0] win [NUM_CLASS];

  for (genvar i = 0; i < NUM_CLASS; i++) begin : g_row
    assign win[i][i] = 1'b1;
    for (genvar j = i + 1; j < NUM_CLASS; j++) begin : g_col
      mutex u_mutex (
        .r0(race_class[i]),
        .r1(race_class[j]),
        .g0(win[i][j]),
        .g1(win[j][i])
      );
    end
    assign grant[i] = &win[i];
  end

  // Grants are mutually exclusive.
  always @(grant) begin
    assert ($onehot0(grant)) else $error("wta_mesh: grant not one-hot: %b", grant);
  end

endmodule
