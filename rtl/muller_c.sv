`timescale 1ps/1ps
// muller_c: N-input Muller C-element.
//
// The output rises when every input is 1, falls when every input is 0 and
// otherwise keeps its value, which makes it the basic state-holding gate of
// four-phase handshakes: it waits for all parties before changing. The
// truth table is the standard one the design uses; the reset input, which
// forces the output to 0, is this design's addition so the state starts
// known. Written as a level-sensitive latch: synthesis maps it to a latch
// (or to a C-element cell by hand); the latch warning is intended.
module muller_c #(
  parameter int N = 2
) (
  input  logic         rst,
  input  logic [N-1:0] in,
  output logic         c
);

  always_latch begin
    if (rst)         c =  1'b0;
    else if (&in)    c =  1'b1;
    else if (~|in)   c =  1'b0;
  end

endmodule
