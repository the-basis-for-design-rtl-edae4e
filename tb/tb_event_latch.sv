// tb_event_latch: random load/clear sequences against a one-entry reference
// store; covers load-over-clear priority and overwriting a held event.
module tb_event_latch;
  import coinc_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, load = 1'b0, clear = 1'b0;
  event_t ev_in = '0, ev_out;
  logic   valid;
  int     checks = 0, failures = 0;
  int     n_both = 0, n_over = 0;

  event_latch dut (.clk, .rst_n, .load_i(load), .ev_i(ev_in), .clear_i(clear),
                   .valid_o(valid), .ev_o(ev_out));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit     m_valid;
    event_t m_ev;
    m_valid = 1'b0;
    m_ev    = '0;
    repeat (2) @(negedge clk);
    check(!valid, "empty after reset");
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      load  = $urandom_range(0, 2) == 0;
      clear = $urandom_range(0, 2) == 0;
      ev_in = '{amp: amp_t'($urandom), ts: ts_t'($urandom)};
      if (load && clear) n_both++;
      if (load && m_valid) n_over++;
      @(negedge clk);
      if (load) begin m_valid = 1'b1; m_ev = ev_in; end
      else if (clear) m_valid = 1'b0;
      check(valid == m_valid, $sformatf("valid step %0d", i));
      if (m_valid) check(ev_out == m_ev, $sformatf("data step %0d", i));
    end
    check(n_both > 10 && n_over > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
