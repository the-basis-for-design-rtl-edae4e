// tb_timestamp_counter: checks that the time base counts one per clock from
// reset, restarts at zero on clear, and resumes counting after a clear.
module tb_timestamp_counter;
  import coinc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  ts_t  ts;
  int   checks = 0, failures = 0;

  timestamp_counter dut (.clk, .rst_n, .clear_i(clear), .ts_o(ts));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    check(ts == 0, "zero in reset");
    rst_n = 1'b1;
    for (int i = 1; i <= 20; i++) begin
      @(negedge clk);
      check(ts == ts_t'(i), $sformatf("count %0d got %0d", i, ts));
    end
    clear = 1'b1;
    @(negedge clk);
    check(ts == 0, "clear");
    @(negedge clk);
    check(ts == 0, "held clear");
    clear = 1'b0;
    for (int i = 1; i <= 10; i++) begin
      @(negedge clk);
      check(ts == ts_t'(i), $sformatf("after clear %0d got %0d", i, ts));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
