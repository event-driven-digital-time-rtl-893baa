`timescale 1ps/1ps
// dcde: behavioural model of a digitally-controlled delay element, the
// single-rail race path of one class.
//
// An edge on race_in (RaceSR) appears on race_out (RaceClass) after
//     T_CELL_PS + (DC_MAX - dc) * UNIT_PS,   DC_MAX = 2**(DC_W-1) - 1,
// so the class with the largest TDC code, i.e. the largest class sum,
// arrives first at the winner-takes-all arbiter. dc is read T_CELL_PS after
// the launch edge. A real DCDE is a multiplexed chain of delay segments or a
// starved inverter; the linear code-to-delay mapping is this design's
// choice. Not synthesizable.
module dcde #(
  parameter int UNIT_PS   = tm_pkg::DCDE_UNIT_PS,
  parameter int DC_W      = tm_pkg::DC_W,
  parameter int T_CELL_PS = tm_pkg::T_CELL_PS
) (
  input  logic                   race_in,
  input  logic signed [DC_W-1:0] dc,
  output logic                   race_out
);

  localparam int DC_MAX = (1 << (DC_W - 1)) - 1;

  // Transport delay in two parts: the fixed cell delay, then the coded part.
  logic launched;

  initial begin
    launched = 1'b0;
    race_out = 1'b0;
  end

  always @(race_in)  launched <= #(T_CELL_PS) race_in;
  always @(launched) race_out <= #((DC_MAX - int'(dc)) * UNIT_PS) launched;

endmodule
