`timescale 1ps/1ps
// lod: leading-ones detector that turns a sum into a coarse/fine delay code.
//
// k is the position of the most significant 1 of sum_value, so k is about
// log2(sum_value). The bits below that 1 are kept and scaled to E_BITS bits:
// shifted right by k - E_BITS when k >= E_BITS, left by E_BITS - k
// otherwise. The pair (k, f) then selects k coarse delay cells of tau and f
// fine cells of tau / 2**E_BITS, i.e. a delay of about log2(sum)*tau
// instead of sum*tau: an exponential range of sums needs only a linear
// number of delay cells. This is the published algorithm; a sum of zero,
// which it leaves undefined, gives k = 0, f = 0 like a sum of one.
// Purely combinational.
module lod #(
  parameter int SUM_W  = tm_pkg::SUM_W,
  parameter int E_BITS = tm_pkg::E_BITS,
  parameter int K_BITS = tm_pkg::K_BITS
) (
  input  logic [SUM_W-1:0]  sum_value,
  output logic [K_BITS-1:0] k,
  output logic [E_BITS-1:0] f
);

  initial begin
    assert (SUM_W <= (1 << K_BITS))
      else $error("lod: SUM_W=%0d needs more than K_BITS=%0d coarse bits", SUM_W, K_BITS);
  end

  int unsigned      lead;
  logic [SUM_W-1:0] resid;
  logic [SUM_W+E_BITS-1:0] scaled;

  always_comb begin
    lead = 0;
    for (int i = 0; i < SUM_W; i++)
      if (sum_value[i]) lead = i;          // last (highest) 1 wins
    resid = sum_value & SUM_W'((1 << lead) - 1);
    if (lead >= E_BITS) scaled = (SUM_W+E_BITS)'(resid) >> (lead - E_BITS);
    else                scaled = (SUM_W+E_BITS)'(resid) << (E_BITS - lead);
    k = K_BITS'(lead);
    f = scaled[E_BITS-1:0];
  end

endmodule
