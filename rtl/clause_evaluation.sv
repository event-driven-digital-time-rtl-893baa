`timescale 1ps/1ps
// clause_evaluation: literal generation, the fire0 register and clause output.
//
// Literal generation turns every feature x_i into the pair
//     literal[2i] = x_i,   literal[2i+1] = ~x_i.
// The literal vector is registered on fire0 (first pipeline register).
// Clause output then forms each clause as the AND, over all literals, of
// (literal | ta_exclude), where ta_exclude[j][l] is the trained automaton
// state of literal l in clause j: 1 leaves the literal out of the clause,
// 0 includes it. The formula is the published one taken literally, so a
// clause that excludes every literal outputs 1.
//
// The split into a registered literal vector and combinational clause
// output follows the published block diagram; presenting the automaton
// states as an input port (rather than a stored table) is this design's
// choice. clause_vector is valid from fire0 plus the AND-tree delay and is
// captured by the next stage's register on fire1.
module clause_evaluation #(
  parameter int NUM_FEATURE = tm_pkg::NUM_FEATURE,
  parameter int NUM_CLAUSE  = tm_pkg::NUM_CLAUSE
) (
  input  logic                                        rst,
  input  logic                                        fire0,
  input  logic [NUM_FEATURE-1:0]                      feature,
  input  logic [NUM_CLAUSE-1:0][2*NUM_FEATURE-1:0]    ta_exclude,
  output logic [NUM_CLAUSE-1:0]                       clause_vector
);

  logic [2*NUM_FEATURE-1:0] literal_d, literal_q;

  always_comb begin
    for (int i = 0; i < NUM_FEATURE; i++) begin
      literal_d[2*i]   = feature[i];
      literal_d[2*i+1] = ~feature[i];
    end
  end

  pipe_reg #(.W(2*NUM_FEATURE)) u_reg0 (
    .rst (rst),
    .fire(fire0),
    .d   (literal_d),
    .q   (literal_q)
  );

  always_comb begin
    for (int j = 0; j < NUM_CLAUSE; j++)
      clause_vector[j] = &(literal_q | ta_exclude[j]);
  end

endmodule
