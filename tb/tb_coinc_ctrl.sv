// tb_coinc_ctrl: random stimulus to the coincidence decision, compared with
// a reference written from the two cases of the algorithm (write and clear
// both inside the window; remove only the earlier event outside it; drop
// when the memory is full; clear both on flush).
module tb_coinc_ctrl;
  import coinc_pkg::*;

  logic    flush, v1, v2, coinc_in, t1_first, full;
  amp_t    a1, a2;
  dt_t     dt;
  logic    clr1, clr2, wr_en, coinc, reject, drop;
  record_t rec;
  int      checks = 0, failures = 0;
  int      n_write = 0, n_rej1 = 0, n_rej2 = 0, n_drop = 0, n_flush = 0;

  coinc_ctrl dut (.flush_i(flush), .valid1_i(v1), .a1_i(a1), .valid2_i(v2), .a2_i(a2),
                  .dt_i(dt), .coinc_i(coinc_in), .t1_first_i(t1_first), .mem_full_i(full),
                  .clear1_o(clr1), .clear2_o(clr2), .wr_en_o(wr_en), .wr_rec_o(rec),
                  .coinc_o(coinc), .reject_o(reject), .drop_o(drop));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      bit e_clr1, e_clr2, e_wr, e_drop, both;
      flush    = $urandom_range(0, 9) == 0;
      v1       = $urandom_range(0, 3) != 0;
      v2       = $urandom_range(0, 3) != 0;
      coinc_in = 1'($urandom_range(0, 1));
      t1_first = 1'($urandom_range(0, 1));
      full     = $urandom_range(0, 5) == 0;
      a1       = amp_t'($urandom);
      a2       = amp_t'($urandom);
      dt       = dt_t'($urandom);
      #1;
      both   = v1 && v2 && !flush;
      e_wr   = both && coinc_in && !full;
      e_drop = both && coinc_in && full;
      e_clr1 = flush || (both && (coinc_in || t1_first));
      e_clr2 = flush || (both && (coinc_in || !t1_first));
      check(wr_en == e_wr, "write");
      check(drop == e_drop, "drop");
      check(clr1 == e_clr1 && clr2 == e_clr2, "clears");
      check(coinc == (both && coinc_in) && reject == (both && !coinc_in), "strobes");
      if (e_wr) check(rec.a1 == a1 && rec.a2 == a2 && rec.dt == dt, "record");
      n_write += e_wr;
      n_drop  += e_drop;
      n_flush += flush;
      n_rej1  += both && !coinc_in && t1_first;
      n_rej2  += both && !coinc_in && !t1_first;
    end
    check(n_write > 0 && n_drop > 0 && n_flush > 0 && n_rej1 > 0 && n_rej2 > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
