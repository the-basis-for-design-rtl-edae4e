// event_latch: temporary memory for the latest event of one channel
// (the "A1,t1" and "A2,t2" stores).
//
// Holds one event and a valid flag. load_i stores ev_i and sets valid;
// clear_i empties the store. If both come in the same cycle, the load wins:
// the controller clears an event it has just used or discarded while a new
// event from the same channel may be arriving, and the new event must be
// kept. A new event arriving while the store is full replaces the old one;
// the newer event is always the closer in time to any later event on the
// other channel, so nothing that could still form a coincidence is lost.
//
// Timing: registered, the stored event is visible the cycle after load_i.
//
// That each channel keeps its event in a temporary store until it is paired
// or removed is the paper's; the overwrite and load-priority rules are this
// design's choices.
module event_latch
  import coinc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load_i,
  input  event_t ev_i,
  input  logic   clear_i,
  output logic   valid_o,
  output event_t ev_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      ev_o    <= '0;
    end else if (load_i) begin
      valid_o <= 1'b1;
      ev_o    <= ev_i;
    end else if (clear_i) begin
      valid_o <= 1'b0;
    end
  end

endmodule
