// tb_timing_tester: random and edge-case time-stamp pairs, including pairs
// that straddle a wrap of the counter and pairs exactly at the window edge,
// checked against |t1 - t2| computed in 64-bit arithmetic.
module tb_timing_tester;
  import coinc_pkg::*;

  ts_t  t1, t2;
  dt_t  w, dt;
  logic coinc, t1_first;
  int   checks = 0, failures = 0;

  timing_tester dut (.t1_i(t1), .t2_i(t2), .window_i(w), .dt_o(dt),
                     .coinc_o(coinc), .t1_first_o(t1_first));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic one(input longint a, input longint d, input int win);
    longint b, mag, sat;
    b  = a + d;                       // t2 = t1 + d, d may be negative
    t1 = ts_t'(a);
    t2 = ts_t'(b);
    w  = dt_t'(win);
    #1;
    mag = d < 0 ? -d : d;
    sat = mag > 65535 ? 65535 : mag;
    check(coinc == (mag <= longint'(win)), $sformatf("coinc t1=%0d d=%0d w=%0d", a, d, win));
    check(dt == dt_t'(sat), $sformatf("dt t1=%0d d=%0d got %0d", a, d, dt));
    check(t1_first == (d >= 0), $sformatf("order t1=%0d d=%0d", a, d));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // window edges
    one(1000, 40, 40);
    one(1000, 41, 40);
    one(1000, -40, 40);
    one(1000, -41, 40);
    one(1000, 0, 0);
    one(5, 70000, 65535);
    // across the wrap
    one(64'hFFFF_FFF0, 32, 40);
    one(64'hFFFF_FFF0, 8, 40);
    one(64'h1_0000_0005, -20, 40);
    for (int i = 0; i < 5000; i++) begin
      longint a, d;
      a = longint'($urandom);
      case ($urandom_range(0, 2))
        0: d = longint'($urandom_range(0, 200)) - 100;
        1: d = longint'($urandom_range(0, 200000)) - 100000;
        default: d = longint'($urandom_range(0, 1 << 30)) - (1 << 29);
      endcase
      one(a, d, $urandom_range(0, 120));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
