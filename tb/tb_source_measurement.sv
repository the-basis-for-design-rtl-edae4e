// tb_source_measurement: the spectrometer at its default parameters on a
// simulated source measurement and on a delay (timing-resolution) test.
//
// Phase 1, source measurement: 60Co (20 kBq) and 137Cs (100 kBq) seen by two
// detectors with a 500 ns window (the default W of 40 periods at 80 MHz).
// Decays follow a Poisson process. A 60Co decay emits 1173 and 1332 keV
// gammas at the same instant; a 137Cs decay emits 662 keV with 85 %
// probability. Each gamma hits detector 1 or detector 2 with probability
// EFF each, and deposits its full energy with probability PHOTO, otherwise
// a uniform 10-90 % of it. The energy scale is 0.5 keV per channel.
// Pulses are trapezoids in continuous time (linear rise, 100 ns flat top,
// linear fall), summed
// on a noisy baseline and sampled every 12.5 ns, so pile-up and threshold
// walk occur naturally. An independent reference finds every pulse's
// amplitude and threshold-crossing cycle from the same sample stream and
// applies the coincidence rules; all records read back from the design must
// match it. The true 60Co coincidences must show up as records whose two
// amplitudes are the two 60Co photopeaks.
//
// Phase 2, delay test: identical pulses on both channels, channel 2 delayed
// by D = 0..400 ns in steps that are not multiples of the clock period. Each
// record's dt, in clock periods of 12.5 ns, must be within one period of D.
//
// The source activities, the 500 ns range and the 80 MHz / 12.5 ns figures
// are those of the reference measurements; efficiency, photopeak fraction,
// pulse shape, noise and energy scale are this testbench's assumptions.
module tb_source_measurement;
  import coinc_pkg::*;

  localparam real TCLK_NS   = 12.5;          // 80 MHz
  localparam real T_SIM_S   = 0.3;           // simulated measurement time
  localparam real A_CO      = 20.0e3;        // Bq
  localparam real A_CS      = 100.0e3;       // Bq
  localparam real EFF       = 0.1;           // per detector, per gamma
  localparam real PHOTO     = 0.35;          // full-energy fraction
  localparam real CH_PER_KEV = 2.0;
  localparam int  TH        = 100;           // 50 keV
  localparam int  W         = DEFAULT_WINDOW;
  localparam int  PEAK_TOL  = 4;

  logic               clk = 1'b0, rst_n = 1'b0;
  amp_t               det1 = '0, det2 = '0;
  logic [HOST_AW-1:0] addr = '0;
  logic               wr = 1'b0, rd = 1'b0, rvalid;
  logic [HOST_DW-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  coinc_spectrometer dut (
    .clk, .rst_n, .det1_sample_i(det1), .det2_sample_i(det2),
    .host_addr_i(addr), .host_wr_i(wr), .host_wdata_i(wdata),
    .host_rd_i(rd), .host_rdata_o(rdata), .host_rvalid_o(rvalid)
  );

  always #6.25 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #400ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus_write(input reg_addr_e a, input logic [31:0] d);
    addr = a; wdata = d; wr = 1'b1;
    @(negedge clk);
    wr = 1'b0;
  endtask

  task automatic bus_read(input reg_addr_e a, output logic [31:0] d);
    addr = a; rd = 1'b1;
    @(negedge clk);
    rd = 1'b0;
    d = rdata;
  endtask

  // ------------------------------------------------------------ pulses
  typedef struct { real t0; real amp; real rise; real flat; real fall; } pulse_t;
  pulse_t act1 [$], act2 [$];

  function automatic real shape(input pulse_t p, input real t);
    real dt = t - p.t0;
    if (dt < 0.0) return 0.0;
    if (dt < p.rise) return p.amp * dt / p.rise;
    if (dt < p.rise + p.flat) return p.amp;
    if (dt < p.rise + p.flat + p.fall) return p.amp * (1.0 - (dt - p.rise - p.flat) / p.fall);
    return 0.0;
  endfunction

  function automatic amp_t sample_at(ref pulse_t act [$], input real t, input int noise);
    real v = real'($urandom_range(0, noise));
    while (act.size() > 0 && t > act[0].t0 + act[0].rise + act[0].flat + act[0].fall) void'(act.pop_front());
    foreach (act[k]) v += shape(act[k], t);
    if (v > 8191.0) v = 8191.0;
    return amp_t'(int'(v));
  endfunction

  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction

  // energy deposited, in channels
  function automatic real deposit(input real e_kev);
    if (urand() < PHOTO) return e_kev * CH_PER_KEV;
    return e_kev * CH_PER_KEV * (0.1 + 0.8 * urand());
  endfunction

  function automatic pulse_t mkpulse(input real t0, input real amp);
    return '{t0: t0, amp: amp, rise: 40.0 + 60.0 * urand(), flat: 100.0, fall: 250.0};
  endfunction

  // one gamma: goes to detector 1, detector 2 or neither
  function automatic void gamma_hit(input real t0, input real e_kev);
    real u = urand();
    if (u < EFF)            act1.push_back(mkpulse(t0, deposit(e_kev)));
    else if (u < 2.0 * EFF) act2.push_back(mkpulse(t0, deposit(e_kev)));
  endfunction

  // ------------------------------------------------------------ reference
  typedef struct { int t; int amp; } mev_t;
  typedef struct { int a1; int a2; int dt; } mrec_t;
  mrec_t exp_recs [$];
  bit    r_in1, r_in2, h_v1, h_v2;
  int    r_t1, r_t2, r_pk1, r_pk2;
  mev_t  h1, h2;
  int    n_ev1, n_ev2, n_rej, n_over;

  // threshold scan of one channel's sample; returns 1 when an event ends
  function automatic bit scan(input int s, inout bit in_p, inout int t0, inout int pk,
                              input int cyc, output mev_t ev);
    ev = '{t: 0, amp: 0};
    if (!in_p && s > TH) begin in_p = 1'b1; t0 = cyc; pk = s; end
    else if (in_p && s > TH) begin if (s > pk) pk = s; end
    else if (in_p) begin in_p = 1'b0; ev = '{t: t0, amp: pk}; return 1'b1; end
    return 1'b0;
  endfunction

  function automatic void model_cycle(input int s1, input int s2, input int cyc);
    mev_t e;
    int dt;
    if (scan(s1, r_in1, r_t1, r_pk1, cyc, e)) begin
      if (h_v1) n_over++;
      h1 = e; h_v1 = 1'b1; n_ev1++;
    end
    if (scan(s2, r_in2, r_t2, r_pk2, cyc, e)) begin
      if (h_v2) n_over++;
      h2 = e; h_v2 = 1'b1; n_ev2++;
    end
    if (h_v1 && h_v2) begin
      dt = h1.t > h2.t ? h1.t - h2.t : h2.t - h1.t;
      if (dt <= W) begin
        exp_recs.push_back('{a1: h1.amp, a2: h2.amp, dt: dt});
        h_v1 = 1'b0; h_v2 = 1'b0;
      end else begin
        n_rej++;
        if (h1.t <= h2.t) h_v1 = 1'b0; else h_v2 = 1'b0;
      end
    end
  endfunction

  function automatic void model_reset();
    r_in1 = 0; r_in2 = 0; h_v1 = 0; h_v2 = 0;
    n_ev1 = 0; n_ev2 = 0; n_rej = 0; n_over = 0;
    exp_recs.delete();
  endfunction

  // ------------------------------------------------------------ readout
  int got_a1 [$], got_a2 [$], got_dt [$];

  task automatic read_all(input string tag);
    logic [31:0] st, da, dd;
    got_a1.delete(); got_a2.delete(); got_dt.delete();
    bus_read(REG_STATUS, st);
    check(!st[31], {tag, ": no overflow"});
    check(st[15:0] == 16'(exp_recs.size()),
          $sformatf("%s: %0d records, reference %0d", tag, st[15:0], exp_recs.size()));
    for (int k = 0; k < int'(st[15:0]); k++) begin
      bus_read(REG_DATA_A, da);
      bus_read(REG_DATA_DT, dd);
      got_a1.push_back(int'(da[12:0]));
      got_a2.push_back(int'(da[28:16]));
      got_dt.push_back(int'(dd[15:0]));
      if (k < exp_recs.size())
        check(got_a1[k] == exp_recs[k].a1 && got_a2[k] == exp_recs[k].a2 && got_dt[k] == exp_recs[k].dt,
              $sformatf("%s rec %0d: %0d %0d %0d, reference %0d %0d %0d", tag, k, got_a1[k],
                        got_a2[k], got_dt[k], exp_recs[k].a1, exp_recs[k].a2, exp_recs[k].dt));
    end
  endtask

  function automatic bit near(input int a, input real e_kev);
    // peak = deposited energy plus the baseline noise (0..40) at the peak
    int c = int'(e_kev * CH_PER_KEV);
    return a >= c - PEAK_TOL && a <= c + 40 + PEAK_TOL;
  endfunction

  // ------------------------------------------------------------ main
  initial begin
    real t_ns, next_co, next_cs, t_end;
    int  cyc, n_co_pairs, n_cs_in, n_co, n_cs;
    amp_t v1, v2;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bus_write(REG_THRESH1, TH);
    bus_write(REG_THRESH2, TH);
    bus_write(REG_CTRL, 32'h3);

    // ---------------- phase 1: 60Co + 137Cs
    model_reset();
    t_end   = T_SIM_S * 1.0e9;
    next_co = -$ln(urand()) / A_CO * 1.0e9;
    next_cs = -$ln(urand()) / A_CS * 1.0e9;
    n_co = 0; n_cs = 0;
    cyc = 0;
    // drained between samples: the memory must not fill, the host keeps up
    while (real'(cyc) * TCLK_NS < t_end) begin
      t_ns = real'(cyc) * TCLK_NS;
      while (next_co <= t_ns) begin
        gamma_hit(next_co, 1173.2);
        gamma_hit(next_co, 1332.5);
        next_co += -$ln(urand()) / A_CO * 1.0e9; n_co++;
      end
      while (next_cs <= t_ns) begin
        if (urand() < 0.85) gamma_hit(next_cs, 661.7);
        next_cs += -$ln(urand()) / A_CS * 1.0e9; n_cs++;
      end
      v1 = sample_at(act1, t_ns, 40);
      v2 = sample_at(act2, t_ns, 40);
      model_cycle(int'(v1), int'(v2), cyc);
      det1 = v1; det2 = v2;
      @(negedge clk);
      cyc++;
    end
    det1 = '0; det2 = '0;
    repeat (400) begin @(negedge clk); model_cycle(0, 0, cyc); cyc++; end
    read_all("source");
    n_co_pairs = 0; n_cs_in = 0;
    foreach (got_a1[k]) begin
      if ((near(got_a1[k], 1173.2) && near(got_a2[k], 1332.5)) ||
          (near(got_a1[k], 1332.5) && near(got_a2[k], 1173.2))) n_co_pairs++;
      if (near(got_a1[k], 661.7) && near(got_a2[k], 661.7)) n_cs_in++;
    end
    $display("source: %0d Co decays, %0d Cs decays, events %0d / %0d, %0d records, %0d rejected pairs, %0d replaced events",
             n_co, n_cs, n_ev1, n_ev2, exp_recs.size(), n_rej, n_over);
    $display("source: %0d records with both 60Co photopeaks, %0d with two 137Cs photopeaks", n_co_pairs, n_cs_in);
    check(n_ev1 > 100 && n_ev2 > 100, "both channels saw events");
    check(n_rej > 0, "random pairs were rejected");
    check(n_co_pairs > 0, "60Co photopeak coincidences recorded");

    // ---------------- phase 2: delay test
    bus_write(REG_CTRL, 32'h3);
    model_reset();
    act1.delete(); act2.delete();
    begin
      int  maxerr_ps;
      real d_ns [$];
      maxerr_ps = 0;
      for (real d = 0.0; d <= 400.0; d += 7.3) d_ns.push_back(d);
      cyc = 0;
      foreach (d_ns[k]) begin
        real    t0;
        pulse_t p;
        t0 = real'(k) * 2000.0 + 100.0 + 12.5 * urand();
        p  = '{t0: t0, amp: 3000.0, rise: 60.0, flat: 100.0, fall: 250.0};
        act1.push_back(p);
        p.t0 = t0 + d_ns[k];
        act2.push_back(p);
      end
      while (real'(cyc) * TCLK_NS < real'(d_ns.size()) * 2000.0 + 1000.0) begin
        t_ns = real'(cyc) * TCLK_NS;
        v1 = sample_at(act1, t_ns, 0);
        v2 = sample_at(act2, t_ns, 0);
        model_cycle(int'(v1), int'(v2), cyc);
        det1 = v1; det2 = v2;
        @(negedge clk);
        cyc++;
      end
      read_all("delay");
      check(got_dt.size() == d_ns.size(), $sformatf("delay: %0d records for %0d delays", got_dt.size(), d_ns.size()));
      foreach (got_dt[k]) begin
        real err;
        if (k >= d_ns.size()) break;
        err = real'(got_dt[k]) * TCLK_NS - d_ns[k];
        if (err < 0.0) err = -err;
        if (int'(err * 1000.0) > maxerr_ps) maxerr_ps = int'(err * 1000.0);
        check(err < TCLK_NS, $sformatf("delay %0.1f ns measured %0d periods", d_ns[k], got_dt[k]));
      end
      $display("delay: %0d delays, largest error %0.2f ns (one period = %0.1f ns)",
               d_ns.size(), real'(maxerr_ps) / 1000.0, TCLK_NS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
