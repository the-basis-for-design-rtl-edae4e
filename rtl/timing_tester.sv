// timing_tester: the "|t1 - t2|" unit.
//
// Computes dt = |t1 - t2| between the two held time stamps and compares it
// with the coincidence window: coinc_o = (dt <= W). It also reports which
// time stamp is the earlier one, which the controller needs to decide which
// event to remove when there is no coincidence.
//
// The difference is taken modulo 2**TS_W and read as a signed number, so the
// result is right across a wrap of the time-stamp counter as long as the two
// events are less than 2**(TS_W-1) periods apart. dt_o is saturated to the
// DT_W-bit record field; because a stored record always has dt <= W and W
// is DT_W bits wide, saturation never affects a stored value.
//
// Purely combinational. The formula and the test dt <= W are the paper's;
// equal time stamps count as t1 first, a choice of this design.
module timing_tester
  import coinc_pkg::*;
(
  input  ts_t  t1_i,
  input  ts_t  t2_i,
  input  dt_t  window_i,
  output dt_t  dt_o,
  output logic coinc_o,
  output logic t1_first_o
);

  logic signed [TS_W-1:0] diff;
  logic        [TS_W-1:0] mag;

  always_comb begin
    diff       = signed'(t1_i - t2_i);
    t1_first_o = diff <= 0;
    mag        = t1_first_o ? ts_t'(-diff) : ts_t'(diff);
    coinc_o    = mag <= TS_W'(window_i);
    dt_o       = (mag > TS_W'({DT_W{1'b1}})) ? {DT_W{1'b1}} : mag[DT_W-1:0];
  end

endmodule
