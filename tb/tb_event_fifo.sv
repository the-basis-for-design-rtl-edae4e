// tb_event_fifo: random writes and reads against a queue reference at the
// default depth, including filling it to full, draining it to empty,
// simultaneous write and read, and clear.
module tb_event_fifo;
  import coinc_pkg::*;

  localparam int DEPTH = 1024;

  logic    clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr = 1'b0, rd = 1'b0;
  record_t wrec = '0, rrec;
  logic    empty, full;
  logic [$clog2(DEPTH):0] count;
  int      checks = 0, failures = 0;
  int      n_full = 0, n_empty = 0, n_both = 0;
  record_t model [$];

  event_fifo dut (.clk, .rst_n, .clear_i(clear), .wr_en_i(wr), .wr_rec_i(wrec),
                  .rd_en_i(rd), .rd_rec_o(rrec), .empty_o(empty), .full_o(full),
                  .count_o(count));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(input int pw, input int pr);
    // issue a legal write/read with the given percent probabilities
    wr   = ($urandom_range(0, 99) < pw) && model.size() < DEPTH;
    rd   = ($urandom_range(0, 99) < pr) && model.size() > 0;
    wrec = '{a1: amp_t'($urandom), a2: amp_t'($urandom), dt: dt_t'($urandom)};
    if (rd) check(rrec == model[0], "read data");
    if (wr && rd) n_both++;
    @(negedge clk);
    if (rd) void'(model.pop_front());
    if (wr) model.push_back(wrec);
    check(count == ($clog2(DEPTH)+1)'(model.size()), "count");
    check(empty == (model.size() == 0) && full == (model.size() == DEPTH), "flags");
    if (full) n_full++;
    if (empty) n_empty++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(empty && !full && count == 0, "reset");
    repeat (1500) step(50, 50);
    repeat (1600) step(90, 10);    // fill
    repeat (1600) step(10, 90);    // drain
    repeat (2000) step(60, 40);
    wr = 1'b0; rd = 1'b0; clear = 1'b1;
    @(negedge clk);
    clear = 1'b0; model.delete();
    check(empty && count == 0, "clear");
    repeat (500) step(50, 50);
    check(n_full > 0 && n_empty > 0 && n_both > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
