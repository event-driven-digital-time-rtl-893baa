`timescale 1ps/1ps
// race_control: four-phase control of the two race launches.
//
// Four Muller C-elements sequence one classification:
//   race_dr = C(fire2, ~dr_done)        launch the dual-rail (S/M) races
//   dr_done = C(all race_s, all race_m)  every dual-rail pulse has arrived
//   race_sr = C(dr_done, ~sr_done)       launch the single-rail races
//   sr_all  = C(all race_class)          every single-rail pulse has arrived
//   sr_done = C(OR(grant), sr_all)       winner granted and all arrived
// fire2 is a short pulse; race_dr rises with it and holds until all S/M
// rails have arrived, then falls (return to zero). race_sr rises once the
// rails have arrived (the TDC codes are ready) and falls when the winner is
// granted and the rails have returned to zero. sr_done falls when the race
// signals and grants are back at zero, ending the cycle. race_sr is held
// until the slowest class has arrived, so no pulse of a losing class is
// still inside its delay line when the next cycle starts. As the lines
// return to zero in arrival order, the grant may pass briefly from the
// winner to the next class; target_class is captured before that.
// C-elements for launch and release, and the inverted feedback into each,
// follow the published race control; the sr_done detector is this design's
// choice, since the one-hot grants alone could never satisfy a C-element.
// Synthesis turns each C-element into a latch, which is intended.
module race_control #(
  parameter int NUM_CLASS = tm_pkg::NUM_CLASS
) (
  input  logic                 rst,
  input  logic                 fire2,
  input  logic [NUM_CLASS-1:0] race_s,
  input  logic [NUM_CLASS-1:0] race_m,
  input  logic [NUM_CLASS-1:0] race_class,
  input  logic [NUM_CLASS-1:0] grant,
  output logic                 race_dr,
  output logic                 race_sr,
  output logic                 dr_done,
  output logic                 sr_done
);

  muller_c #(.N(2)) u_c_dr (
    .rst(rst), .in({fire2, ~dr_done}), .c(race_dr)
  );

  muller_c #(.N(2*NUM_CLASS)) u_c_dr_done (
    .rst(rst), .in({race_s, race_m}), .c(dr_done)
  );

  muller_c #(.N(2)) u_c_sr (
    .rst(rst), .in({dr_done, ~sr_done}), .c(race_sr)
  );

  // RaceSR done: the winner is granted and every RaceClass pulse has left
  // its delay line; it falls once all lines and grants are back at zero.
  // Waiting for the slowest class keeps a losing pulse that is still inside
  // its line from reaching the arbiter in the next cycle.
  logic sr_all;

  muller_c #(.N(NUM_CLASS)) u_c_sr_all (
    .rst(rst), .in(race_class), .c(sr_all)
  );

  muller_c #(.N(2)) u_c_sr_done (
    .rst(rst), .in({|grant, sr_all}), .c(sr_done)
  );

endmodule
