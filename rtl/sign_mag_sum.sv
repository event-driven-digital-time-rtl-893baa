`timescale 1ps/1ps
// sign_mag_sum: splits one class sum into two unsigned rails.
//
// The time domain cannot carry a sign, so the class sum sum_j W_j * C_j is
// kept as a pair of non-negative numbers:
//     sum_m = total magnitude of the selected positive weights
//     sum_s = total magnitude of the selected negative weights
// and the class sum is sum_m - sum_s. Each rail later launches its own race
// pulse and the arrival difference of the two pulses stands for the signed
// class sum. Assigning S to the negative and M to the positive contributions
// is this design's reading of the published "sign" and "magnitude" rails,
// whose waveforms name them positive and negative. Sums saturate at
// 2**SUM_W - 1, which the default sizes (12 clauses of magnitude <= 15,
// sum <= 180) never reach. Purely combinational.
module sign_mag_sum #(
  parameter int NUM_CLAUSE = tm_pkg::NUM_CLAUSE,
  parameter int WMAG_W     = tm_pkg::WMAG_W,
  parameter int SUM_W      = tm_pkg::SUM_W
) (
  input  logic [NUM_CLAUSE-1:0]             sel_neg,
  input  logic [NUM_CLAUSE-1:0][WMAG_W-1:0] sel_mag,
  output logic [SUM_W-1:0]                  sum_s,
  output logic [SUM_W-1:0]                  sum_m
);

  localparam int ACC_W = SUM_W + $clog2(NUM_CLAUSE + 1) + WMAG_W;
  localparam logic [ACC_W-1:0] SAT = ACC_W'((1 << SUM_W) - 1);

  logic [ACC_W-1:0] acc_s, acc_m;

  always_comb begin
    acc_s = '0;
    acc_m = '0;
    for (int j = 0; j < NUM_CLAUSE; j++) begin
      if (sel_neg[j]) acc_s = acc_s + ACC_W'(sel_mag[j]);
      else            acc_m = acc_m + ACC_W'(sel_mag[j]);
    end
    sum_s = (acc_s > SAT) ? SAT[SUM_W-1:0] : acc_s[SUM_W-1:0];
    sum_m = (acc_m > SAT) ? SAT[SUM_W-1:0] : acc_m[SUM_W-1:0];
  end

endmodule
