`timescale 1ps/1ps
// pipe_reg: bundled-data pipeline register.
//
// Captures d on the rising edge of a click stage's fire pulse and holds it
// until the next fire. Reset (active high, asynchronous) clears it to zero.
// The registers between Literal Generation, Clause Output, Class Sum and the
// time-domain Argmax are all of this kind.
module pipe_reg #(
  parameter int W = 8
) (
  input  logic         rst,
  input  logic         fire,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  always_ff @(posedge fire or posedge rst) begin
    if (rst) q <= '0;
    else     q <= d;
  end

endmodule
