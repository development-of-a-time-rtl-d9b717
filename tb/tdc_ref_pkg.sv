// tdc_ref_pkg: reference model of the TDC time measurement, for testbenches.
//
// Works from the hit time and the clock waveforms of tdc_clkgen alone: it
// finds the level of each clock phase at the hit time (q[3:0]), applies the
// fine-time correction table, counts the clk_0 rising and falling edges
// since the counter reset to get CNT1 and CNT2, and picks CNT2 for fine
// bins 0 and 1 and CNT1 otherwise. Times are in ps; t_rst is the clk_0
// rising edge at which the counters start (count 0 in that period).
`timescale 1ps/10fs
package tdc_ref_pkg;

  localparam real PERIOD = 3125.0;
  localparam real BIN    = 781.25;

  // true while a 50% clock whose rising edge is at 'rise' is high at t
  function automatic bit clk_high(real t, real rise);
    real ph;
    ph = (t - rise) / PERIOD;
    ph = ph - $floor(ph);
    return ph < 0.5;
  endfunction

  function automatic logic [3:0] sample_q(real t, real t0, real skew180);
    logic [3:0] q;
    q[0] = clk_high(t, t0);
    q[1] = clk_high(t, t0 + BIN);
    q[2] = !clk_high(t, t0 + skew180);
    q[3] = !clk_high(t, t0 + BIN);
    return q;
  endfunction

  // the correction table, written out code by code
  function automatic int fine_of(logic [3:0] q);
    case (q)
      4'b1001, 4'b1101, 4'b1000: return 0;
      4'b0011, 4'b1011, 4'b0001: return 1;
      4'b0110, 4'b0010, 4'b0111: return 2;
      4'b1100, 4'b0100, 4'b1110: return 3;
      default:                   return -1;
    endcase
  endfunction

  function automatic bit is_exception(logic [3:0] q);
    return !(q inside {4'b1001, 4'b0011, 4'b0110, 4'b1100});
  endfunction

  // counter values at time t, as unbounded integers
  function automatic longint cnt1_at(real t, real t_rst);
    return longint'($floor((t - t_rst) / PERIOD));
  endfunction

  function automatic longint cnt2_at(real t, real t_rst);
    return longint'($floor((t - t_rst - PERIOD / 2.0) / PERIOD)) + 1;
  endfunction

  // full measured time in fine bins, before wrapping to 17 bits
  function automatic longint meas_bins(real t, real t0, real skew180, real t_rst);
    logic [3:0] q;
    int         f;
    longint     c;
    q = sample_q(t, t0, skew180);
    f = fine_of(q);
    c = (f < 2) ? cnt2_at(t, t_rst) : cnt1_at(t, t_rst);
    return c * 4 + f;
  endfunction

  // the ideal time in bins, ignoring skew
  function automatic longint ideal_bins(real t, real t_rst);
    return longint'($floor((t - t_rst) / BIN));
  endfunction

endpackage
