`timescale 1ps/1ps
// matched_delay: behavioural model of the delay element placed on the
// request wire between two click stages.
//
// In a bundled-data pipeline the request must reach the next stage only
// after the data it accompanies has settled through the stage's logic. The
// real part is a chain of delay cells sized to the worst-case logic delay;
// it has no logic function, so it is modelled here as a transport delay of
// DELAY_PS on both edges. Not synthesizable as a delay (synthesis would
// reduce it to a wire); a standard-cell delay chain takes its place.
module matched_delay #(
  parameter int DELAY_PS = tm_pkg::MATCH_DELAY_PS
) (
  input  logic a,
  output logic z
);

  initial z = 1'b0;

  always @(a) z <= #(DELAY_PS) a;

endmodule
