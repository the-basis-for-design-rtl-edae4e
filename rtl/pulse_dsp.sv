// pulse_dsp: one pulse-processing channel (DSP1 or DSP2).
//
// Takes one digitised detector sample per clock. When a sample exceeds the
// lower threshold (strictly greater), the channel records the current time
// stamp as the pulse's t and starts tracking the largest sample. When the
// signal returns to or below the threshold, the pulse is over and the channel
// issues one event (A, t) with A the largest sample seen.
//
// Interface: sample_i/ts_i are taken together on each rising edge while
// enable_i is high. ev_valid_o is a one-cycle strobe, asserted on the edge
// after the first sample at or below threshold; ev_o is held until the next
// event. Dropping enable_i in the middle of a pulse abandons that pulse.
// A channel thus accepts a sample every cycle, and a pulse that is above
// threshold for N samples yields its event N+1 cycles after its first
// above-threshold sample was presented.
//
// The paper specifies what the channel delivers: the amplitude and the
// moment the pulse crosses the lower threshold. How the amplitude is found
// is not given; a peak search over the above-threshold samples, with the
// ADC baseline taken as zero, is the simplest method and is this design's
// choice.
module pulse_dsp
  import coinc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   enable_i,
  input  amp_t   sample_i,
  input  amp_t   thresh_i,
  input  ts_t    ts_i,
  output logic   busy_o,      // a pulse is in progress
  output logic   ev_valid_o,
  output event_t ev_o
);

  typedef enum logic {S_IDLE, S_PULSE} state_e;
  state_e state_q;
  amp_t   peak_q;
  ts_t    t_q;

  wire above = sample_i > thresh_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      peak_q     <= '0;
      t_q        <= '0;
      ev_valid_o <= 1'b0;
      ev_o       <= '0;
    end else begin
      ev_valid_o <= 1'b0;
      if (!enable_i) begin
        state_q <= S_IDLE;
      end else begin
        unique case (state_q)
          S_IDLE: if (above) begin
            state_q <= S_PULSE;
            t_q     <= ts_i;
            peak_q  <= sample_i;
          end
          S_PULSE: if (above) begin
            if (sample_i > peak_q) peak_q <= sample_i;
          end else begin
            state_q    <= S_IDLE;
            ev_valid_o <= 1'b1;
            ev_o       <= '{amp: peak_q, ts: t_q};
          end
        endcase
      end
    end
  end

  assign busy_o = (state_q == S_PULSE);

endmodule
