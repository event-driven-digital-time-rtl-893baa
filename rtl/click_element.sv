`timescale 1ps/1ps
// click_element: one stage of a two-phase (transition-signalling) click
// pipeline controller.
//
// A stage fires when a new request has arrived (req_in differs from the
// input phase) and the previous output has been acknowledged (ack_in equals
// the output phase):
//     fire = (req_in ^ phase_in) & ~(ack_in ^ phase_out)
// The rising edge of fire toggles both phase registers. req_out carries
// phase_in and ack_out carries phase_out; the toggle closes the fire
// condition again, so fire is a self-resetting pulse that also clocks the
// stage's data register. The equations and the output mapping are those of
// the published click-element algorithm.
//
// Timing: the phase-register outputs reach the fire logic and the ports
// T_CQ_PS after the register toggles (its clock-to-output delay). This sets
// the width of the fire pulse as the gate delays of the real circuit do;
// synthesis ignores the delay. Reset (active high,
// asynchronous) clears both phases.
module click_element #(
  parameter int T_CQ_PS = tm_pkg::T_CQ_PS
) (
  input  logic rst,
  input  logic req_in,
  input  logic ack_in,
  output logic req_out,
  output logic ack_out,
  output logic fire
);

  logic phase_in, phase_out;          // phase registers
  logic phase_in_q, phase_out_q;      // their outputs, T_CQ_PS later

  assign #(T_CQ_PS) phase_in_q  = phase_in;
  assign #(T_CQ_PS) phase_out_q = phase_out;

  assign fire = (req_in ^ phase_in_q) & ~(ack_in ^ phase_out_q);

  always_ff @(posedge fire or posedge rst) begin
    if (rst) begin
      phase_in  <= 1'b0;
      phase_out <= 1'b0;
    end else begin
      phase_in  <= ~phase_in;
      phase_out <= ~phase_out;
    end
  end

  assign req_out = phase_in_q;
  assign ack_out = phase_out_q;

endmodule
