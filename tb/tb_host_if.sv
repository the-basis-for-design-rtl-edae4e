// tb_host_if: exercises the register map over the host bus: reset values,
// write and read-back, the flush pulse, the status word, reading records
// (DATA_A then DATA_DT, which pops) from a small reference FIFO, reads when
// empty, and the sticky overflow flag.
module tb_host_if;
  import coinc_pkg::*;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic [HOST_AW-1:0] addr = '0;
  logic               wr = 1'b0, rd = 1'b0, rvalid;
  logic [HOST_DW-1:0] wdata = '0, rdata;
  logic               run, flush, pop;
  amp_t               th1, th2;
  dt_t                win;
  record_t            rec;
  logic               empty, drop = 1'b0;
  logic [10:0]        count;
  int                 checks = 0, failures = 0;
  int                 n_flush = 0;
  record_t            model [$];
  int                 rd_idx = 0;   // records before rd_idx have been popped

  host_if dut (.clk, .rst_n, .addr_i(addr), .wr_i(wr), .wdata_i(wdata), .rd_i(rd),
               .rdata_o(rdata), .rvalid_o(rvalid), .run_o(run), .flush_o(flush),
               .thresh1_o(th1), .thresh2_o(th2), .window_o(win), .rec_i(rec),
               .empty_i(empty), .count_i(count), .drop_i(drop), .pop_o(pop));

  always #5 clk = ~clk;

  // reference event memory feeding the interface
  assign empty = model.size() == rd_idx;
  assign count = 11'(model.size() - rd_idx);
  assign rec   = empty ? '0 : model[rd_idx];
  always @(posedge clk) if (pop) rd_idx <= rd_idx + 1;
  always @(posedge clk) if (rst_n && flush) n_flush++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic bus_write(input reg_addr_e a, input logic [31:0] d);
    addr = a; wdata = d; wr = 1'b1;
    @(negedge clk);
    wr = 1'b0;
  endtask

  task automatic bus_read(input reg_addr_e a, output logic [31:0] d);
    addr = a; rd = 1'b1;
    @(negedge clk);
    rd = 1'b0;
    check(rvalid, "rvalid");
    d = rdata;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!run && th1 == 0 && th2 == 0 && win == dt_t'(DEFAULT_WINDOW), "reset values");
    bus_read(REG_WINDOW, d);
    check(d == DEFAULT_WINDOW, "window reset read");
    bus_write(REG_THRESH1, 32'd321);
    bus_write(REG_THRESH2, 32'hFFFF_1ABC);
    bus_write(REG_WINDOW, 32'd77);
    check(th1 == amp_t'(321) && th2 == amp_t'(13'h1ABC) && win == dt_t'(77), "config");
    bus_read(REG_THRESH1, d); check(d == 321, "th1 read");
    bus_read(REG_THRESH2, d); check(d == 32'h1ABC, "th2 read");
    bus_write(REG_CTRL, 32'h1);
    check(run && !flush, "run set");
    bus_read(REG_CTRL, d); check(d == 1, "ctrl read");
    // flush is a single-cycle pulse
    addr = REG_CTRL; wdata = 32'h3; wr = 1'b1;
    @(negedge clk);
    wr = 1'b0;
    check(flush && run, "flush pulse");
    @(negedge clk);
    check(!flush, "flush self-clears");
    // records
    for (int i = 0; i < 5; i++)
      model.push_back('{a1: amp_t'(100 + i), a2: amp_t'(8000 - i), dt: dt_t'(i * 7)});
    bus_read(REG_STATUS, d);
    check(d == {1'b0, 1'b0, 14'd0, 16'd5}, $sformatf("status %h", d));
    for (int i = 0; i < 5; i++) begin
      bus_read(REG_DATA_A, d);
      check(d == {3'd0, 13'(8000 - i), 3'd0, 13'(100 + i)}, $sformatf("data_a %0d %h", i, d));
      check(count == 11'(5 - i), "DATA_A does not pop");
      bus_read(REG_DATA_DT, d);
      check(d == 32'(i * 7), $sformatf("data_dt %0d %h", i, d));
      check(count == 11'(4 - i), "DATA_DT pops");
    end
    bus_read(REG_DATA_DT, d);
    check(d == 0 && count == 0, "read when empty");
    bus_read(REG_STATUS, d);
    check(d == {1'b0, 1'b1, 30'd0}, $sformatf("empty status %h", d));
    // overflow flag
    drop = 1'b1; @(negedge clk); drop = 1'b0;
    bus_read(REG_STATUS, d); check(d[31], "overflow set");
    bus_read(REG_STATUS, d); check(d[31], "overflow sticky");
    bus_write(REG_CTRL, 32'h2);
    check(!run, "run cleared");
    @(negedge clk);
    bus_read(REG_STATUS, d); check(!d[31], "overflow cleared by flush");
    check(n_flush == 2, "flush count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
