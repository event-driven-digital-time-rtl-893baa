`timescale 1ps/1ps
// phase_interface: four-phase to two-phase boundary of the classifier.
//
// The time-domain classifier runs a four-phase (return-to-zero) cycle per
// inference, while the pipeline controller speaks two-phase. A toggle
// flip-flop turns each complete cycle into one transition of req_out (the
// pipeline's output request): it toggles when sr_done falls, i.e. when the
// grants have returned to zero and the classifier is ready again. The
// winning class, the index of the one-hot grant, is captured when sr_done
// rises and stays on target_class until the next result. The TFF is the
// published interface; the choice of edges and the class register are this
// design's. Reset (active high, asynchronous) clears both.
module phase_interface #(
  parameter int NUM_CLASS = tm_pkg::NUM_CLASS,
  parameter int CLS_W     = (NUM_CLASS > 1) ? $clog2(NUM_CLASS) : 1
) (
  input  logic                 rst,
  input  logic                 sr_done,
  input  logic [NUM_CLASS-1:0] grant,
  output logic                 req_out,
  output logic [CLS_W-1:0]     target_class
);

  logic [CLS_W-1:0] idx;

  always_comb begin
    idx = '0;
    for (int i = 0; i < NUM_CLASS; i++)
      if (grant[i]) idx = CLS_W'(i);
  end

  always_ff @(posedge sr_done or posedge rst) begin
    if (rst) target_class <= '0;
    else     target_class <= idx;
  end

  always_ff @(negedge sr_done or posedge rst) begin
    if (rst) req_out <= 1'b0;
    else     req_out <= ~req_out;
  end

endmodule
