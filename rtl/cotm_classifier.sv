`timescale 1ps/1ps
// cotm_classifier: hybrid digital / time-domain classification of a
// Coalesced Tsetlin Machine.
//
// Digital part (settles between fire1 and fire2):
//   binary_mult_matrix  selects the weight of every clause that fired,
//   sign_mag_sum        per class, adds the selected positive magnitudes
//                       into M and the negative ones into S,
//   lod                 compresses S and M of each class into (k, f),
//   pipe_reg (fire2)    holds all (k, f) codes for the race.
// Time-domain part (one four-phase cycle per inference, race_control):
//   diff_delay_path     RaceDR -> RaceS / RaceM of each class, delay ~ log2,
//   vernier_tdc         arrival difference t_M - t_S -> signed code dc,
//   dcde                RaceSR -> RaceClass, delay falling with dc,
//   wta_mesh            the first RaceClass wins, one-hot grant
//                       (wta_tree instead when WTA_TREE = 1),
//   phase_interface     captures the class and toggles req_out.
// The predicted class is therefore the one maximising
//   (8*k_M + f_M) - (8*k_S + f_S)  ~  8*(log2 M - log2 S),
// a log-domain stand-in for the exact sum M - S. Block order and names
// follow the published classifier; widths, unit delays and the S/M sign
// assignment are this design's. Interface: fire2 is the click pulse of the
// last pipeline stage; req_out toggles once per completed classification,
// when target_class is valid. Ties resolve to the lower class index.
module cotm_classifier #(
  parameter int NUM_CLAUSE   = tm_pkg::NUM_CLAUSE,
  parameter int NUM_CLASS    = tm_pkg::NUM_CLASS,
  parameter int WMAG_W       = tm_pkg::WMAG_W,
  parameter int E_BITS       = tm_pkg::E_BITS,
  parameter int K_BITS       = tm_pkg::K_BITS,
  parameter int SUM_W        = 1 << K_BITS,
  parameter int TAU_PS       = tm_pkg::TAU_PS,
  parameter int DCDE_UNIT_PS = tm_pkg::DCDE_UNIT_PS,
  parameter bit WTA_TREE     = 1'b0,
  parameter int CLS_W        = (NUM_CLASS > 1) ? $clog2(NUM_CLASS) : 1
) (
  input  logic                                            rst,
  input  logic                                            fire2,
  input  logic [NUM_CLAUSE-1:0]                           clause_vector,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0]            weight_neg,
  input  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0][WMAG_W-1:0] weight_mag,
  output logic                                            req_out,
  output logic [CLS_W-1:0]                                target_class,
  output logic [NUM_CLASS-1:0]                            grant
);

  localparam int DC_W    = K_BITS + E_BITS + 1;
  localparam int CODE_W  = K_BITS + E_BITS;          // one (k, f) code
  localparam int REG_W   = 2 * NUM_CLASS * CODE_W;   // S and M of all classes

  // ---------------- digital part ----------------
  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0]             sel_neg;
  logic [NUM_CLASS-1:0][NUM_CLAUSE-1:0][WMAG_W-1:0] sel_mag;

  binary_mult_matrix #(.NUM_CLAUSE(NUM_CLAUSE), .NUM_CLASS(NUM_CLASS), .WMAG_W(WMAG_W)) u_mult (
    .clause_vector(clause_vector),
    .weight_neg   (weight_neg),
    .weight_mag   (weight_mag),
    .sel_neg      (sel_neg),
    .sel_mag      (sel_mag)
  );

  logic [NUM_CLASS-1:0][SUM_W-1:0]  sum_s, sum_m;
  logic [NUM_CLASS-1:0][K_BITS-1:0] k_s_d, k_m_d, k_s, k_m;
  logic [NUM_CLASS-1:0][E_BITS-1:0] f_s_d, f_m_d, f_s, f_m;

  for (genvar c = 0; c < NUM_CLASS; c++) begin : g_sum
    sign_mag_sum #(.NUM_CLAUSE(NUM_CLAUSE), .WMAG_W(WMAG_W), .SUM_W(SUM_W)) u_sum (
      .sel_neg(sel_neg[c]),
      .sel_mag(sel_mag[c]),
      .sum_s  (sum_s[c]),
      .sum_m  (sum_m[c])
    );
    lod #(.SUM_W(SUM_W), .E_BITS(E_BITS), .K_BITS(K_BITS)) u_lod_s (
      .sum_value(sum_s[c]), .k(k_s_d[c]), .f(f_s_d[c])
    );
    lod #(.SUM_W(SUM_W), .E_BITS(E_BITS), .K_BITS(K_BITS)) u_lod_m (
      .sum_value(sum_m[c]), .k(k_m_d[c]), .f(f_m_d[c])
    );
  end

  // fire2 register (REG) in front of the delay paths.
  pipe_reg #(.W(REG_W)) u_reg2 (
    .rst (rst),
    .fire(fire2),
    .d   ({k_s_d, f_s_d, k_m_d, f_m_d}),
    .q   ({k_s,   f_s,   k_m,   f_m})
  );

  // ---------------- time-domain part ----------------
  logic                            race_dr, race_sr, dr_done, sr_done;
  logic [NUM_CLASS-1:0]            race_s, race_m, race_class;
  logic signed [DC_W-1:0]          dc [NUM_CLASS];

  for (genvar c = 0; c < NUM_CLASS; c++) begin : g_race
    diff_delay_path #(.TAU_PS(TAU_PS), .E_BITS(E_BITS), .K_BITS(K_BITS)) u_path_s (
      .race_in(race_dr), .k(k_s[c]), .f(f_s[c]), .race_out(race_s[c])
    );
    diff_delay_path #(.TAU_PS(TAU_PS), .E_BITS(E_BITS), .K_BITS(K_BITS)) u_path_m (
      .race_in(race_dr), .k(k_m[c]), .f(f_m[c]), .race_out(race_m[c])
    );
    vernier_tdc #(.LSB_PS(TAU_PS / (1 << E_BITS)), .DC_W(DC_W)) u_tdc (
      .race_s(race_s[c]), .race_m(race_m[c]), .dc(dc[c])
    );
    dcde #(.UNIT_PS(DCDE_UNIT_PS), .DC_W(DC_W)) u_dcde (
      .race_in(race_sr), .dc(dc[c]), .race_out(race_class[c])
    );
  end

  race_control #(.NUM_CLASS(NUM_CLASS)) u_ctrl (
    .rst    (rst),
    .fire2  (fire2),
    .race_s (race_s),
    .race_m (race_m),
    .race_class(race_class),
    .grant  (grant),
    .race_dr(race_dr),
    .race_sr(race_sr),
    .dr_done(dr_done),
    .sr_done(sr_done)
  );

  if (WTA_TREE) begin : g_tree
    wta_tree #(.NUM_CLASS(NUM_CLASS)) u_wta (
      .race_class(race_class), .grant(grant)
    );
  end else begin : g_mesh
    wta_mesh #(.NUM_CLASS(NUM_CLASS)) u_wta (
      .race_class(race_class), .grant(grant)
    );
  end

  phase_interface #(.NUM_CLASS(NUM_CLASS), .CLS_W(CLS_W)) u_if (
    .rst         (rst),
    .sr_done     (sr_done),
    .grant       (grant),
    .req_out     (req_out),
    .target_class(target_class)
  );

endmodule
