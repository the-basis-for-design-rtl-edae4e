// tb_pulse_dsp: drives random triangular pulses, some with a second bump,
// into one channel and compares every event with the amplitude and
// threshold-crossing time worked out from the sample list. Also checks the
// latency (event one cycle after the first sample at or below threshold),
// that sub-threshold bumps produce nothing, and that dropping enable
// abandons a pulse.
module tb_pulse_dsp;
  import coinc_pkg::*;

  localparam int N = 6000;

  logic   clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  amp_t   sample = '0, thresh;
  ts_t    ts = '0;
  logic   busy, ev_valid;
  event_t ev;
  int     checks = 0, failures = 0;

  amp_t   wave [N];
  bit     en_wave [N];
  // expected events: index of the edge at which ev_valid rises
  int     exp_amp [N];
  int     exp_t [N];
  bit     exp_ev [N];

  pulse_dsp dut (.clk, .rst_n, .enable_i(en), .sample_i(sample), .thresh_i(thresh),
                 .ts_i(ts), .busy_o(busy), .ev_valid_o(ev_valid), .ev_o(ev));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos, peak, rise, fall, nev, nseen, above_start, pk;
    bit in_pulse;
    thresh = amp_t'(200);
    foreach (wave[i]) begin wave[i] = amp_t'($urandom_range(0, 150)); en_wave[i] = 1'b1; end
    // pulses
    pos = 20;
    while (pos < N - 100) begin
      peak = $urandom_range(150, 8191);
      rise = $urandom_range(1, 8);
      fall = $urandom_range(1, 20);
      for (int i = 0; i < rise; i++) wave[pos + i] = amp_t'(peak * (i + 1) / rise);
      for (int j = 0; j < fall; j++) wave[pos + rise + j] = amp_t'(peak * (fall - j) / (fall + 1));
      if ($urandom_range(0, 3) == 0) begin  // second bump on the tail
        wave[pos + rise + fall / 2] = amp_t'($urandom_range(150, 8191));
      end
      pos += rise + fall + $urandom_range(2, 40);
    end
    // a window with enable low in the middle of a pulse
    for (int i = 0; i < 10; i++) wave[N - 80 + i] = amp_t'(1000 + i);
    for (int i = N - 75; i < N - 60; i++) en_wave[i] = 1'b0;
    for (int i = N - 60; i < N; i++) wave[i] = '0;
    // reference: scan samples as seen by the channel at each edge
    foreach (exp_ev[i]) exp_ev[i] = 1'b0;
    in_pulse = 1'b0; nev = 0;
    for (int i = 0; i < N; i++) begin
      if (!en_wave[i]) begin in_pulse = 1'b0; continue; end
      if (!in_pulse && wave[i] > thresh) begin
        in_pulse = 1'b1; above_start = i; pk = int'(wave[i]);
      end else if (in_pulse && wave[i] > thresh) begin
        if (int'(wave[i]) > pk) pk = int'(wave[i]);
      end else if (in_pulse) begin
        in_pulse = 1'b0;
        exp_ev[i] = 1'b1; exp_amp[i] = pk; exp_t[i] = above_start + 1000; nev++;
      end
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    nseen = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      // outputs of edge i-1
      if (i > 0) begin
        check(ev_valid == exp_ev[i-1], $sformatf("valid at %0d: %0b exp %0b", i-1, ev_valid, exp_ev[i-1]));
        if (ev_valid && exp_ev[i-1]) begin
          nseen++;
          check(ev.amp == amp_t'(exp_amp[i-1]), $sformatf("amp at %0d: %0d exp %0d", i-1, ev.amp, exp_amp[i-1]));
          check(ev.ts == ts_t'(exp_t[i-1]), $sformatf("t at %0d: %0d exp %0d", i-1, ev.ts, exp_t[i-1]));
        end
      end
      sample = wave[i];
      en     = en_wave[i];
      ts     = ts_t'(i + 1000);
    end
    check(nev > 100 && nseen == nev, $sformatf("events %0d seen %0d", nev, nseen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
