`timescale 1ps/1ps
// mutex: behavioural model of a two-way mutual-exclusion element.
//
// The circuit is an SR latch of two cross-coupled NAND gates followed by a
// transistor-level metastability filter. Whichever request rises first
// takes the latch and receives its grant; the other request waits until
// the winner drops its request. A grant falls when its own request falls.
// Two requests closer together than the feedback delay of the NANDs make
// the real latch metastable and its choice unpredictable; this model
// resolves within T_MUTEX_PS and gives an exact tie to r0. The structure is
// the published one; the delay and the tie rule are this model's.
// g0 and g1 are never high together. Not synthesizable (analogue filter).
module mutex #(
  parameter int T_MUTEX_PS = tm_pkg::T_MUTEX_PS
) (
  input  logic r0,
  input  logic r1,
  output logic g0,
  output logic g1
);

  // Requests as the latch sees them, T_MUTEX_PS after they change.
  logic r0_d, r1_d;

  initial begin
    r0_d = 1'b0;
    r1_d = 1'b0;
    g0   = 1'b0;
    g1   = 1'b0;
  end

  always @(r0) r0_d <= #(T_MUTEX_PS) r0;
  always @(r1) r1_d <= #(T_MUTEX_PS) r1;

  // A grant is released when its request falls; a free latch goes to a
  // high request, r0 first. A held grant is never taken away.
  always @(posedge r0_d or negedge r0_d or posedge r1_d or negedge r1_d) begin
    if (g0 && !r0_d) g0 = 1'b0;
    if (g1 && !r1_d) g1 = 1'b0;
    if (!g0 && !g1) begin
      if (r0_d)      g0 = 1'b1;
      else if (r1_d) g1 = 1'b1;
    end
  end

endmodule
