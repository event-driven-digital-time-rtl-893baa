`timescale 1ps/1ps
// hd_delay_line: behavioural model of the per-class delay line of the
// multi-class (non-coalesced) Tsetlin Machine classifier.
//
// The line is a chain of N cells, one per clause of the class. A cell adds
// UNIT_PS when its clause disagrees with the clause's vote (mismatch = 1)
// and nothing when it agrees, so an edge on race_in reaches race_out after
//     T_CELL_PS + popcount(mismatch) * UNIT_PS,
// a delay proportional to the Hamming distance between the clause outputs
// and the ideal pattern (positive clauses 1, negative clauses 0). Rising
// and falling edges take the same path. mismatch is read T_CELL_PS after
// the launch edge. The published architecture states only that the class
// delay follows the Hamming distance; the two-valued cell and the delay
// values are this design's choice. A delay line has no logic function:
// this is a timed model, not synthesizable logic.
module hd_delay_line #(
  parameter int N         = tm_pkg::NUM_CLAUSE / tm_pkg::NUM_CLASS,
  parameter int UNIT_PS   = tm_pkg::HD_UNIT_PS,
  parameter int T_CELL_PS = tm_pkg::T_CELL_PS
) (
  input  logic         race_in,
  input  logic [N-1:0] mismatch,
  output logic         race_out
);

  // Transport delay in two parts: the fixed cell delay, then the coded part.
  logic launched;

  initial begin
    launched = 1'b0;
    race_out = 1'b0;
  end

  always @(race_in)  launched <= #(T_CELL_PS) race_in;
  always @(launched) race_out <= #(int'($countones(mismatch)) * UNIT_PS) launched;

endmodule
