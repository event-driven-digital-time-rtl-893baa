`timescale 1ps/1ps
// diff_delay_path: behavioural model of one rail of the differential delay
// path (one per sign rail and one per magnitude rail of every class).
//
// The real circuit is a chain of coarse cells of delay tau, of which k are
// switched into the path, followed by fine cells of tau / 2**E_BITS, of
// which f are switched in. A launch edge on race_in (RaceDR) therefore
// reaches race_out (RaceS or RaceM) after
//     T_CELL_PS + k * TAU_PS + f * TAU_PS / 2**E_BITS
// picoseconds; the fixed T_CELL_PS is the intrinsic delay of the path,
// common to both rails, so it cancels in their difference. Rising and
// falling edges take the same path. k and f are read T_CELL_PS after the
// launch edge, so they may change at the same instant as the launch.
// The coarse/fine structure follows the published delay path; the unit
// delays are this design's choice. A delay line has no logic function:
// this file is a timed model, not synthesizable logic.
module diff_delay_path #(
  parameter int TAU_PS    = tm_pkg::TAU_PS,
  parameter int E_BITS    = tm_pkg::E_BITS,
  parameter int K_BITS    = tm_pkg::K_BITS,
  parameter int T_CELL_PS = tm_pkg::T_CELL_PS
) (
  input  logic              race_in,
  input  logic [K_BITS-1:0] k,
  input  logic [E_BITS-1:0] f,
  output logic              race_out
);

  localparam int FINE_PS = TAU_PS / (1 << E_BITS);

  initial begin
    assert (FINE_PS * (1 << E_BITS) == TAU_PS)
      else $error("diff_delay_path: TAU_PS must be a multiple of 2**E_BITS");
  end

  // Transport delay in two parts: the fixed cell delay, then the coded part.
  logic launched;

  initial begin
    launched = 1'b0;
    race_out = 1'b0;
  end

  always @(race_in)  launched <= #(T_CELL_PS) race_in;
  always @(launched) race_out <= #(int'(k) * TAU_PS + int'(f) * FINE_PS) launched;

endmodule
