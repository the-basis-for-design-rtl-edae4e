// tb_coinc_spectrometer: end-to-end test of the two-channel coincidence
// spectrometer at its default parameters.
//
// The testbench synthesises two detector sample streams made of triangular
// pulses on a noisy baseline, arranged in scenarios: pairs inside the
// window, pairs just inside and just outside its edge, pairs far outside it,
// lone pulses, a second pulse on one channel before the other channel fires,
// and pulses ending on both channels in the same cycle. An independent
// event-level model finds each pulse's amplitude and threshold-crossing
// time from the sample streams and applies the coincidence rules (write
// (A1, A2, |t1 - t2|) when |t1 - t2| <= W, otherwise discard the earlier
// event) to predict the record list. The host bus is then used to read the
// records back, which must match the prediction exactly.
//
// Phases: (1) mixed scenarios; (2) more coincidences than the event memory
// holds, read only afterwards, to check that the first DEPTH records are
// kept, later ones are dropped and the overflow flag is raised; a flush must
// then clear it; (3) pulses while the run bit is off must record nothing.
// Every mechanism (write, reject of either channel, overwrite of a waiting
// event, simultaneous events, window edge, memory full/drop, flush, stopped
// run) is counted and must occur at least once.
module tb_coinc_spectrometer;
  import coinc_pkg::*;

  localparam int DEPTH = 1024;     // event memory depth at the default
  localparam int TH1   = 100;
  localparam int TH2   = 150;
  localparam int W     = DEFAULT_WINDOW;

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

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- counters
  int c_write = 0, c_reject1 = 0, c_reject2 = 0, c_drop = 0, c_overwrite = 0;
  int c_tie = 0, c_flush = 0;
  always @(posedge clk) if (rst_n) begin
    c_write     += int'(dut.wr_en);
    c_drop      += int'(dut.drop);
    c_reject1   += int'(dut.reject && dut.clear1);
    c_reject2   += int'(dut.reject && dut.clear2);
    c_overwrite += int'((dut.dsp1_valid && dut.held1_valid && !dut.clear1) ||
                        (dut.dsp2_valid && dut.held2_valid && !dut.clear2));
    c_tie       += int'(dut.dsp1_valid && dut.dsp2_valid);
    c_flush     += int'(dut.flush);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- host bus
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

  // ---------------------------------------------------------------- stimulus
  amp_t s1 [], s2 [];

  task automatic noise(input int n);
    s1 = new[n]; s2 = new[n];
    foreach (s1[i]) begin
      s1[i] = amp_t'($urandom_range(0, TH1 - 10));
      s2[i] = amp_t'($urandom_range(0, TH2 - 10));
    end
  endtask

  task automatic pulse(input int ch, input int at, input int peak, input int rise, input int fall);
    for (int i = 0; i < rise; i++) begin
      if (ch == 1) s1[at + i] = amp_t'(peak * (i + 1) / rise);
      else         s2[at + i] = amp_t'(peak * (i + 1) / rise);
    end
    for (int j = 0; j < fall; j++) begin
      if (ch == 1) s1[at + rise + j] = amp_t'(peak * (fall - j) / (fall + 1));
      else         s2[at + rise + j] = amp_t'(peak * (fall - j) / (fall + 1));
    end
  endtask

  function automatic int rpeak();
    return $urandom_range(TH2 + 20, 8191);
  endfunction

  // ---------------------------------------------------------------- model
  typedef struct { int t; int amp; int emit; } mev_t;
  typedef struct { int a1; int a2; int dt; } mrec_t;

  mrec_t exp_recs [$];
  int    m_write, m_reject, m_drop, m_edge, m_overwrite;

  function automatic void find_events(input amp_t s [], input int th, ref mev_t evs [$]);
    bit in_p = 1'b0;
    int t0 = 0, pk = 0;
    evs.delete();
    foreach (s[i]) begin
      if (!in_p && int'(s[i]) > th) begin in_p = 1'b1; t0 = i; pk = int'(s[i]); end
      else if (in_p && int'(s[i]) > th) begin if (int'(s[i]) > pk) pk = int'(s[i]); end
      else if (in_p) begin in_p = 1'b0; evs.push_back('{t: t0, amp: pk, emit: i}); end
    end
  endfunction

  // Applies the coincidence rules to the events of one stream pair.
  function automatic void model_run(input int mem_used);
    mev_t e1 [$], e2 [$];
    mev_t h1, h2;
    bit   v1 = 1'b0, v2 = 1'b0;
    int   i1 = 0, i2 = 0, now, dt;
    find_events(s1, TH1, e1);
    find_events(s2, TH2, e2);
    while (i1 < e1.size() || i2 < e2.size()) begin
      now = 1 << 30;
      if (i1 < e1.size()) now = e1[i1].emit;
      if (i2 < e2.size() && e2[i2].emit < now) now = e2[i2].emit;
      if (i1 < e1.size() && e1[i1].emit == now) begin
        if (v1) m_overwrite++;
        h1 = e1[i1]; v1 = 1'b1; i1++;
      end
      if (i2 < e2.size() && e2[i2].emit == now) begin
        if (v2) m_overwrite++;
        h2 = e2[i2]; v2 = 1'b1; i2++;
      end
      if (v1 && v2) begin
        dt = h1.t > h2.t ? h1.t - h2.t : h2.t - h1.t;
        if (dt <= W) begin
          if (exp_recs.size() + mem_used < DEPTH) begin
            exp_recs.push_back('{a1: h1.amp, a2: h2.amp, dt: dt});
            m_write++;
          end else m_drop++;
          if (dt == W) m_edge++;
          v1 = 1'b0; v2 = 1'b0;
        end else begin
          m_reject++;
          if (h1.t <= h2.t) v1 = 1'b0; else v2 = 1'b0;
        end
      end
    end
  endfunction

  task automatic drive();
    foreach (s1[i]) begin
      det1 = s1[i];
      det2 = s2[i];
      @(negedge clk);
    end
    det1 = '0; det2 = '0;
    repeat (5) @(negedge clk);
  endtask

  task automatic read_back(input string tag);
    logic [31:0] st, da, dd;
    bus_read(REG_STATUS, st);
    check(st[15:0] == 16'(exp_recs.size()), $sformatf("%s count %0d exp %0d", tag, st[15:0], exp_recs.size()));
    foreach (exp_recs[k]) begin
      bus_read(REG_DATA_A, da);
      bus_read(REG_DATA_DT, dd);
      check(da[12:0] == 13'(exp_recs[k].a1) && da[28:16] == 13'(exp_recs[k].a2) &&
            dd == 32'(exp_recs[k].dt),
            $sformatf("%s rec %0d: got A1=%0d A2=%0d dt=%0d exp %0d %0d %0d", tag, k,
                      da[12:0], da[28:16], dd, exp_recs[k].a1, exp_recs[k].a2, exp_recs[k].dt));
    end
    bus_read(REG_STATUS, st);
    check(st[30] && st[15:0] == 0, $sformatf("%s empty after read", tag));
  endtask

  initial begin
    logic [31:0] d;
    int pos, typ, dd, p, r1, f1;
    int w_before, j_before, edge1;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    bus_read(REG_WINDOW, d);
    check(d == 32'(W), "window reset value");
    bus_write(REG_THRESH1, 32'(TH1));
    bus_write(REG_THRESH2, 32'(TH2));
    bus_write(REG_CTRL, 32'h3);      // run + flush

    // ---------------- phase 1: mixed scenarios
    noise(400 * 160 + 200);
    pos = 100;
    for (int k = 0; k < 400; k++) begin
      typ = $urandom_range(0, 7);
      p  = rpeak();
      r1 = $urandom_range(1, 6);
      f1 = $urandom_range(1, 14);
      unique case (typ)
        0, 1: begin   // inside the window
          dd = $urandom_range(0, 2 * W) - W;
          pulse(1, pos + 50, p, r1, f1);
          pulse(2, pos + 50 + dd, rpeak(), $urandom_range(1, 6), $urandom_range(1, 14));
        end
        2: begin      // at the window edge, single-step rise so t is exact
          dd = (($urandom_range(0, 1) == 0) ? -1 : 1) * (W + $urandom_range(0, 1));
          pulse(1, pos + 50, p, 1, f1);
          pulse(2, pos + 50 + dd, rpeak(), 1, $urandom_range(1, 14));
        end
        3: begin      // far outside the window
          dd = (($urandom_range(0, 1) == 0) ? -1 : 1) * $urandom_range(W + 1, 90);
          pulse(1, pos + 50, p, r1, f1);
          pulse(2, pos + 50 + dd, rpeak(), $urandom_range(1, 6), $urandom_range(1, 14));
        end
        4: pulse($urandom_range(1, 2), pos + 50, p, r1, f1);   // lone pulse
        5: begin      // two pulses on one channel, then the other channel
          pulse(1, pos + 20, p, r1, f1);
          pulse(1, pos + 60, rpeak(), $urandom_range(1, 6), $urandom_range(1, 14));
          pulse(2, pos + 70, rpeak(), $urandom_range(1, 6), $urandom_range(1, 14));
        end
        default: begin // identical shapes: both events in the same cycle
          pulse(1, pos + 50, p, r1, f1);
          pulse(2, pos + 50, p, r1, f1);
        end
      endcase
      pos += 160;
    end
    exp_recs.delete();
    m_write = 0; m_reject = 0; m_drop = 0; m_edge = 0; m_overwrite = 0;
    model_run(0);
    drive();
    check(c_write == m_write, $sformatf("phase 1 writes %0d exp %0d", c_write, m_write));
    check(c_reject1 + c_reject2 == m_reject, $sformatf("phase 1 rejects %0d exp %0d", c_reject1 + c_reject2, m_reject));
    check(c_overwrite == m_overwrite, $sformatf("phase 1 overwrites %0d exp %0d", c_overwrite, m_overwrite));
    read_back("phase 1");
    $display("phase 1: %0d records, %0d rejects, %0d overwrites, %0d at window edge, %0d ties",
             m_write, m_reject, m_overwrite, m_edge, c_tie);
    edge1 = m_edge;

    // ---------------- phase 2: event memory overflow
    bus_write(REG_CTRL, 32'h3);      // flush: empties the stores, restarts time
    w_before = c_write;
    noise((DEPTH + 60) * 40 + 100);
    pos = 50;
    for (int k = 0; k < DEPTH + 60; k++) begin
      dd = $urandom_range(0, 10);
      pulse(1, pos, rpeak(), $urandom_range(1, 4), $urandom_range(1, 8));
      pulse(2, pos + dd, rpeak(), $urandom_range(1, 4), $urandom_range(1, 8));
      pos += 40;
    end
    exp_recs.delete();
    m_write = 0; m_reject = 0; m_drop = 0; m_edge = 0; m_overwrite = 0;
    model_run(0);
    drive();
    check(m_drop > 0 && c_drop == m_drop, $sformatf("phase 2 drops %0d exp %0d", c_drop, m_drop));
    check(c_write - w_before == DEPTH, "phase 2 writes fill the memory");
    bus_read(REG_STATUS, d);
    check(d[31] && d[15:0] == 16'(DEPTH), $sformatf("phase 2 status %h", d));
    read_back("phase 2");
    bus_read(REG_STATUS, d);
    check(d[31], "overflow flag stays after reading");
    bus_write(REG_CTRL, 32'h3);
    @(negedge clk);
    bus_read(REG_STATUS, d);
    check(!d[31], "flush clears overflow");

    // ---------------- phase 3: run off
    bus_write(REG_CTRL, 32'h0);
    j_before = c_write;
    noise(2000);
    for (int k = 0; k < 20; k++) begin
      pulse(1, 50 + k * 90, rpeak(), 2, 5);
      pulse(2, 55 + k * 90, rpeak(), 2, 5);
    end
    drive();
    bus_read(REG_STATUS, d);
    check(c_write == j_before && d[15:0] == 0 && d[30], "nothing recorded while stopped");

    // ---------------- coverage of mechanisms
    check(c_write > 0,      "coincidence write happened");
    check(c_reject1 > 0,    "reject of channel 1 event happened");
    check(c_reject2 > 0,    "reject of channel 2 event happened");
    check(c_overwrite > 0,  "overwrite of a waiting event happened");
    check(c_tie > 0,        "simultaneous events happened");
    check(edge1 > 0,       "coincidence exactly at the window edge happened");
    check(c_drop > 0,       "memory full drop happened");
    check(c_flush >= 3,     "flush happened");
    $display("mechanisms: writes=%0d reject1=%0d reject2=%0d overwrite=%0d tie=%0d drop=%0d flush=%0d",
             c_write, c_reject1, c_reject2, c_overwrite, c_tie, c_drop, c_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
