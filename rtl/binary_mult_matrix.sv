`timescale 1ps/1ps
// binary_mult_matrix: the "multiplier" of the CoTM classifier.
//
// A clause output is one bit, so multiplying it by a clause weight is a
// selection: for every class c and clause j the matrix passes the weight
// (sign bit and magnitude) when clause j fired, and zero otherwise. It is a
// plain AND/MUX array with no state and no timing of its own.
//
// Weights are in sign-magnitude form (weight_neg = 1 for a negative weight),
// which is this design's choice; it lets the following sums split positive
// and negative contributions without a subtraction.
module binary_mult_matrix #(
  parameter int NUM_CLAUSE = tm_pkg::NUM_CLAUSE,
  parameter int NUM_CLASS  = tm_pkg::NUM_CLASS,
  parameter int WMAG_W     = tm_pkg::WMAG_W
) (
  input  logic [NUM_CLAUSE-1:0]                                clause_vector,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0]                 weight_neg,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0][WMAG_W-1:0]     weight_mag,
  output logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0]                 sel_neg,
  output logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0][WMAG_W-1:0]     sel_mag
);

  always_comb begin
    for (int c = 0; c < NUM_CLASS; c++) begin
      for (int j = 0; j < NUM_CLAUSE; j++) begin
        sel_neg[c][j] = clause_vector[j] & weight_neg[c][j];
        sel_mag[c][j] = clause_vector[j] ? weight_mag[c][j] : '0;
      end
    end
  end

endmodule
