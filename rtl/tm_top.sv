`timescale 1ps/1ps
// tm_top: event-driven CoTM inference pipeline, the top of the design.
//
// A producer offers a feature vector with a transition on req_in (two-phase
// bundled data); the pipeline answers with a transition on req_out and the
// predicted class on target_class, and needs a transition on ack_in before
// it may offer the next result. There is no clock: three click stages
// (async_controller) fire in turn as data moves through
//   Literal generation -> [fire0] -> Clause output -> [fire1]
//   -> Class sum (multiplier, S/M sums, LOD) -> [fire2] -> time-domain argmax
// The first two functions are digital logic; the argmax is decided by a race
// of delayed pulses (cotm_classifier), whose four-phase completion produces
// req_out through a toggle flip-flop. Up to three inferences are in flight.
// The trained model (automaton states and sign-magnitude clause weights)
// arrives on ports and must be held stable while the pipeline runs.
//
// COALESCED selects the classifier. 1 (default): the hybrid CoTM race,
// with signed per-class clause weights. 0: the multi-class TM race, in
// which clause j belongs to class j / (NUM_CLAUSE / NUM_CLASS) with a fixed
// polarity (first half of each class positive) and the weight ports are
// unused. Both share the front end and the output handshake.
//
// WTA_TREE selects the winner-takes-all arbiter of either classifier:
// 0 (default) the mesh of pairwise mutexes, 1 the binary tree of
// arbitration cells. Both grant the first arrival, ties to the lower index.
//
// The stages, their order and the request/acknowledge topology follow the
// published architecture; sizes default to its Iris configuration (16
// features, 12 clauses, 3 classes). Delays, widths beyond the published
// ones and the model ports are this design's choices.
module tm_top #(
  parameter int NUM_FEATURE    = tm_pkg::NUM_FEATURE,
  parameter int NUM_CLAUSE     = tm_pkg::NUM_CLAUSE,
  parameter int NUM_CLASS      = tm_pkg::NUM_CLASS,
  parameter int WMAG_W         = tm_pkg::WMAG_W,
  parameter int E_BITS         = tm_pkg::E_BITS,
  parameter int K_BITS         = tm_pkg::K_BITS,
  parameter int TAU_PS         = tm_pkg::TAU_PS,
  parameter int DCDE_UNIT_PS   = tm_pkg::DCDE_UNIT_PS,
  parameter int MATCH_DELAY_PS = tm_pkg::MATCH_DELAY_PS,
  parameter bit COALESCED      = 1'b1,
  parameter bit WTA_TREE       = 1'b0,
  parameter int CLS_W          = (NUM_CLASS > 1) ? $clog2(NUM_CLASS) : 1
) (
  input  logic                                             rst,
  // producer side
  input  logic                                             req_in,
  output logic                                             ack_out,
  input  logic [NUM_FEATURE-1:0]                           feature,
  // trained model
  input  logic [NUM_CLAUSE-1:0][2*NUM_FEATURE-1:0]         ta_exclude,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0]             weight_neg,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0][WMAG_W-1:0] weight_mag,
  // consumer side
  output logic                                             req_out,
  input  logic                                             ack_in,
  output logic [CLS_W-1:0]                                 target_class,
  output logic [NUM_CLASS-1:0]                             grant
);

  logic [2:0]            fire;
  logic                  ctrl_req_out;   // click 2 phase; req_out comes from the classifier
  logic [NUM_CLAUSE-1:0] clause_d, clause_q;

  async_controller #(.STAGES(3), .MATCH_DELAY_PS(MATCH_DELAY_PS)) u_ctrl (
    .rst    (rst),
    .req_in (req_in),
    .ack_out(ack_out),
    .req_out(ctrl_req_out),
    .ack_in (ack_in),
    .fire   (fire)
  );

  clause_evaluation #(.NUM_FEATURE(NUM_FEATURE), .NUM_CLAUSE(NUM_CLAUSE)) u_clause (
    .rst          (rst),
    .fire0        (fire[0]),
    .feature      (feature),
    .ta_exclude   (ta_exclude),
    .clause_vector(clause_d)
  );

  pipe_reg #(.W(NUM_CLAUSE)) u_reg1 (
    .rst (rst),
    .fire(fire[1]),
    .d   (clause_d),
    .q   (clause_q)
  );

  if (COALESCED) begin : g_cotm
    cotm_classifier #(
      .NUM_CLAUSE  (NUM_CLAUSE),
      .NUM_CLASS   (NUM_CLASS),
      .WMAG_W      (WMAG_W),
      .E_BITS      (E_BITS),
      .K_BITS      (K_BITS),
      .TAU_PS      (TAU_PS),
      .DCDE_UNIT_PS(DCDE_UNIT_PS),
      .WTA_TREE    (WTA_TREE),
      .CLS_W       (CLS_W)
    ) u_cls (
      .rst          (rst),
      .fire2        (fire[2]),
      .clause_vector(clause_q),
      .weight_neg   (weight_neg),
      .weight_mag   (weight_mag),
      .req_out      (req_out),
      .target_class (target_class),
      .grant        (grant)
    );
  end else begin : g_multiclass
    // Clause j belongs to class j / (NUM_CLAUSE / NUM_CLASS); the weights
    // are not used.
    localparam int CPC = NUM_CLAUSE / NUM_CLASS;
    initial begin
      assert (CPC * NUM_CLASS == NUM_CLAUSE)
        else $error("tm_top: NUM_CLAUSE must be a multiple of NUM_CLASS");
    end
    hd_classifier #(
      .NUM_CLASS       (NUM_CLASS),
      .CLAUSE_PER_CLASS(CPC),
      .WTA_TREE        (WTA_TREE),
      .CLS_W           (CLS_W)
    ) u_cls (
      .rst          (rst),
      .fire2        (fire[2]),
      .clause_vector(clause_q[CPC*NUM_CLASS-1:0]),
      .req_out      (req_out),
      .target_class (target_class),
      .grant        (grant)
    );
  end

endmodule
