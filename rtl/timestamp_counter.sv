// timestamp_counter: the common time base of both channels.
//
// A free-running binary counter advanced once per clock period, so a time
// stamp is quantised to 1/f0 (12.5 ns at 80 MHz). Both pulse-processing
// channels sample the same counter, which makes their time stamps directly
// comparable. The counter wraps modulo 2**TS_W; the timing tester takes
// differences modulo 2**TS_W, so wrapping is harmless for events closer than
// 2**(TS_W-1) periods.
//
// Interface: clear_i (synchronous) restarts the count at zero on the next
// edge, used when a measurement is started. ts_o is registered and is the
// time stamp of the current cycle.
//
// The use of a single counter at the system clock follows the paper's
// description of time-stamp timing; the width and the clear are this
// design's choices.
module timestamp_counter
  import coinc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear_i,
  output ts_t  ts_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ts_o <= '0;
    else if (clear_i) ts_o <= '0;
    else              ts_o <= ts_o + 1'b1;
  end

endmodule
