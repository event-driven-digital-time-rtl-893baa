`timescale 1ps/1ps
// vernier_tdc: behavioural model of the Vernier time-to-digital converter
// that measures one class's pair of race pulses.
//
// It time-stamps the rising edges of race_s and race_m and, once both have
// arrived, outputs the signed code
//     dc = round((t_m - t_s) / LSB_PS),  saturated to DC_W bits.
// A positive code means the positive-weight rail arrived later than the
// negative-weight rail, i.e. a larger (more positive) class sum. With the
// default LSB equal to the fine delay step tau / 2**E_BITS the code is
// exact: dc = (8*k_m + f_m) - (8*k_s + f_s). dc holds until the next pair.
// dc starts at 0 and needs no reset: every pair overwrites it.
// A real Vernier TDC (two delay lines of slightly different cell delay and
// a row of arbiters) needs a conversion time; this model has none. The
// sign convention is this design's choice. Not synthesizable.
module vernier_tdc #(
  parameter int LSB_PS = tm_pkg::TAU_PS / (1 << tm_pkg::E_BITS),
  parameter int DC_W   = tm_pkg::DC_W
) (
  input  logic                   race_s,
  input  logic                   race_m,
  output logic signed [DC_W-1:0] dc
);

  localparam int DC_MAX = (1 << (DC_W - 1)) - 1;

  realtime t_s, t_m;

  function automatic logic signed [DC_W-1:0] code(realtime tm, realtime ts);
    int q;
    q = $rtoi(((tm - ts) / LSB_PS) + ((tm >= ts) ? 0.5 : -0.5));
    if (q >  DC_MAX) q =  DC_MAX;
    if (q < -DC_MAX) q = -DC_MAX;
    return DC_W'(q);
  endfunction

  initial begin
    dc  = '0;
    t_s = 0;
    t_m = 0;
  end

  // One process time-stamps every rising edge and, when the second rail of
  // a pair has arrived, converts the difference.
  logic s_q, m_q;   // rail levels at the previous evaluation

  initial begin
    s_q = 1'b0;
    m_q = 1'b0;
  end

  always @(posedge race_s or negedge race_s or posedge race_m or negedge race_m) begin
    if (race_s && !s_q) t_s = $realtime;
    if (race_m && !m_q) t_m = $realtime;
    if (((race_s && !s_q) || (race_m && !m_q)) && race_s && race_m)
      dc <= code(t_m, t_s);
    s_q = race_s;
    m_q = race_m;
  end

endmodule
