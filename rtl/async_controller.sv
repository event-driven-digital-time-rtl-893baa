`timescale 1ps/1ps
// async_controller: three-stage click-element pipeline controller.
//
// Stage i fires fire[i], which clocks the data register behind pipeline
// function i. The request of stage i reaches stage i+1 through a matched
// delay; the acknowledge of stage i+1 returns to stage i directly. All
// signalling is two-phase: every transition of req_in is one new token.
//
//   req_in -> click0 -> delay -> click1 -> delay -> click2 -> req_out
//   ack_out <- click0 <------- click1 <------- click2 <- ack_in
//
// The three stages and the place of the delays follow the published
// controller; the delay value MATCH_DELAY_PS is this design's choice and must
// exceed the data-path delay of the stage it guards.
module async_controller #(
  parameter int STAGES         = 3,
  parameter int MATCH_DELAY_PS = tm_pkg::MATCH_DELAY_PS,
  parameter int T_CQ_PS        = tm_pkg::T_CQ_PS
) (
  input  logic              rst,
  input  logic              req_in,
  output logic              ack_out,
  output logic              req_out,
  input  logic              ack_in,
  output logic [STAGES-1:0] fire
);

  logic [STAGES-1:0] req_i, ack_i, req_o, ack_o;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    click_element #(.T_CQ_PS(T_CQ_PS)) u_click (
      .rst    (rst),
      .req_in (req_i[s]),
      .ack_in (ack_i[s]),
      .req_out(req_o[s]),
      .ack_out(ack_o[s]),
      .fire   (fire[s])
    );
    if (s < STAGES - 1) begin : g_link
      matched_delay #(.DELAY_PS(MATCH_DELAY_PS)) u_delay (.a(req_o[s]), .z(req_i[s+1]));
      assign ack_i[s] = ack_o[s+1];
    end
  end

  assign req_i[0]        = req_in;
  assign ack_out         = ack_o[0];
  assign ack_i[STAGES-1] = ack_in;
  assign req_out         = req_o[STAGES-1];

endmodule
