// coinc_spectrometer: two-channel event-by-event digital coincidence
// spectrometer (top level).
//
// Each detector's digitised signal goes to its own pulse-processing channel,
// which reports every pulse as an amplitude A and the time t at which the
// pulse crossed the channel's lower threshold, t read from a time-stamp
// counter common to both channels. Each channel's latest event waits in a
// temporary store. When both stores are full, the timing tester forms
// dt = |t1 - t2|; if dt <= W the controller writes (A1, A2, dt) into the
// event memory and empties both stores, otherwise it removes the earlier
// event and keeps the later one for the next comparison. The host reads the
// records and sets thresholds and window through the interfacing unit.
//
// Ports: det1_sample_i/det2_sample_i carry one unsigned ADC sample per clock
// from each detector (the digitisers are outside this design); the host bus
// is described in host_if. All logic runs on one clock, which is also the
// time-stamp clock f0.
//
// The block structure and the coincidence algorithm follow the paper; the
// widths, the memory depth, the host bus and the handling of a full memory
// are this design's choices.
module coinc_spectrometer
  import coinc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  amp_t               det1_sample_i,
  input  amp_t               det2_sample_i,
  input  logic [HOST_AW-1:0] host_addr_i,
  input  logic               host_wr_i,
  input  logic [HOST_DW-1:0] host_wdata_i,
  input  logic               host_rd_i,
  output logic [HOST_DW-1:0] host_rdata_o,
  output logic               host_rvalid_o
);

  localparam int unsigned CNT_W = $clog2(FIFO_DEPTH) + 1;

  logic    run, flush;
  amp_t    thresh1, thresh2;
  dt_t     window;
  ts_t     ts;

  logic    dsp1_valid, dsp2_valid, busy1, busy2;
  event_t  dsp1_ev, dsp2_ev;

  logic    held1_valid, held2_valid;
  event_t  held1_ev, held2_ev;
  logic    clear1, clear2;

  dt_t     dt;
  logic    in_window, t1_first;

  logic    wr_en, coinc, reject, drop;
  record_t wr_rec, rd_rec;
  logic    mem_empty, mem_full, pop;
  logic [CNT_W-1:0] mem_count;

  timestamp_counter u_time (
    .clk, .rst_n, .clear_i(flush), .ts_o(ts)
  );

  pulse_dsp u_dsp1 (
    .clk, .rst_n, .enable_i(run), .sample_i(det1_sample_i), .thresh_i(thresh1),
    .ts_i(ts), .busy_o(busy1), .ev_valid_o(dsp1_valid), .ev_o(dsp1_ev)
  );

  pulse_dsp u_dsp2 (
    .clk, .rst_n, .enable_i(run), .sample_i(det2_sample_i), .thresh_i(thresh2),
    .ts_i(ts), .busy_o(busy2), .ev_valid_o(dsp2_valid), .ev_o(dsp2_ev)
  );

  event_latch u_held1 (
    .clk, .rst_n, .load_i(dsp1_valid && !flush), .ev_i(dsp1_ev), .clear_i(clear1),
    .valid_o(held1_valid), .ev_o(held1_ev)
  );

  event_latch u_held2 (
    .clk, .rst_n, .load_i(dsp2_valid && !flush), .ev_i(dsp2_ev), .clear_i(clear2),
    .valid_o(held2_valid), .ev_o(held2_ev)
  );

  timing_tester u_tester (
    .t1_i(held1_ev.ts), .t2_i(held2_ev.ts), .window_i(window),
    .dt_o(dt), .coinc_o(in_window), .t1_first_o(t1_first)
  );

  coinc_ctrl u_ctrl (
    .flush_i(flush),
    .valid1_i(held1_valid), .a1_i(held1_ev.amp),
    .valid2_i(held2_valid), .a2_i(held2_ev.amp),
    .dt_i(dt), .coinc_i(in_window), .t1_first_i(t1_first),
    .mem_full_i(mem_full),
    .clear1_o(clear1), .clear2_o(clear2),
    .wr_en_o(wr_en), .wr_rec_o(wr_rec),
    .coinc_o(coinc), .reject_o(reject), .drop_o(drop)
  );

  event_fifo #(.DEPTH(FIFO_DEPTH)) u_mem (
    .clk, .rst_n, .clear_i(flush),
    .wr_en_i(wr_en), .wr_rec_i(wr_rec),
    .rd_en_i(pop), .rd_rec_o(rd_rec),
    .empty_o(mem_empty), .full_o(mem_full), .count_o(mem_count)
  );

  host_if #(.CNT_W(CNT_W)) u_host (
    .clk, .rst_n,
    .addr_i(host_addr_i), .wr_i(host_wr_i), .wdata_i(host_wdata_i),
    .rd_i(host_rd_i), .rdata_o(host_rdata_o), .rvalid_o(host_rvalid_o),
    .run_o(run), .flush_o(flush),
    .thresh1_o(thresh1), .thresh2_o(thresh2), .window_o(window),
    .rec_i(rd_rec), .empty_i(mem_empty), .count_i(mem_count),
    .drop_i(drop), .pop_o(pop)
  );

endmodule
