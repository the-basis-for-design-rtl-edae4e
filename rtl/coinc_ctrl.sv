// coinc_ctrl: the coincidence decision ("the program").
//
// Looks at the two temporary event stores each cycle. Nothing happens until
// both hold an event. Then, with dt = |t1 - t2| and window W from the timing
// tester:
//   dt <= W : coincidence. The record (A1, A2, dt) is written into the event
//             memory and both stores are emptied.
//   dt >  W : no coincidence. The earlier of the two events is removed; the
//             later one stays and waits for the next event on the other
//             channel, against which it is tested in turn.
// If the event memory is full when a coincidence is found, the record is
// lost: both stores are still emptied and drop_o pulses so the host can see
// that data were lost. flush_i empties both stores (start of a measurement).
//
// The record fields are the two held amplitudes and the tester's dt, passed
// through unchanged; the controller's work is deciding when they are written
// and which stores are emptied.
//
// Purely combinational: the decision, the store clears and the memory write
// all take effect on the same clock edge, so one pair is resolved per cycle
// and a coincidence is written one cycle after its second event is stored.
//
// The two cases and the removal of the earlier event are the paper's
// algorithm; the handling of a full memory and the flush are this design's.
module coinc_ctrl
  import coinc_pkg::*;
(
  input  logic    flush_i,
  input  logic    valid1_i,
  input  amp_t    a1_i,
  input  logic    valid2_i,
  input  amp_t    a2_i,
  input  dt_t     dt_i,
  input  logic    coinc_i,
  input  logic    t1_first_i,
  input  logic    mem_full_i,
  output logic    clear1_o,
  output logic    clear2_o,
  output logic    wr_en_o,
  output record_t wr_rec_o,
  output logic    coinc_o,    // a coincidence was found this cycle
  output logic    reject_o,   // a pair failed the window test this cycle
  output logic    drop_o      // a coincidence was lost to a full memory
);

  logic both;

  always_comb begin
    both     = valid1_i && valid2_i && !flush_i;
    coinc_o  = both && coinc_i;
    reject_o = both && !coinc_i;
    wr_en_o  = coinc_o && !mem_full_i;
    drop_o   = coinc_o && mem_full_i;
    wr_rec_o = '{a1: a1_i, a2: a2_i, dt: dt_i};
    clear1_o = flush_i || coinc_o || (reject_o && t1_first_i);
    clear2_o = flush_i || coinc_o || (reject_o && !t1_first_i);
  end

endmodule
