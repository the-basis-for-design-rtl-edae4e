// coinc_pkg: types and constants shared by the two-channel digital
// coincidence spectrometer.
//
// An event is the pair (A, t) a pulse-processing channel produces: the pulse
// amplitude A and the time stamp t at which the pulse first exceeded the
// channel's lower threshold. A coincidence record is the triple
// (A1, A2, dt) with dt = |t1 - t2|, which is what gets stored for the host.
//
// The system clock f0 is the time-stamp clock, so one time-stamp unit is
// 1/f0. The 80 MHz default is the clock at which the timing test was run
// (12.5 ns resolution). All bit widths here are this design's own choices:
// 13-bit amplitudes give 8K channels, like the energy ADCs of the analog
// system this design replaces; 32-bit time stamps wrap after about 53 s at
// 80 MHz; 16-bit dt and window values cover up to 819 us.
package coinc_pkg;

  parameter int unsigned SAMPLE_W = 13;          // ADC sample / amplitude bits
  parameter int unsigned TS_W     = 32;          // time-stamp bits
  parameter int unsigned DT_W     = 16;          // dt and window bits
  parameter int unsigned F0_HZ    = 80_000_000;  // time-stamp clock
  // Default coincidence window in clock periods: 500 ns at 80 MHz, the
  // time range used in the reference measurement.
  parameter int unsigned DEFAULT_WINDOW = 40;

  typedef logic [SAMPLE_W-1:0] amp_t;
  typedef logic [TS_W-1:0]     ts_t;
  typedef logic [DT_W-1:0]     dt_t;

  // One detected pulse.
  typedef struct packed {
    amp_t amp;   // peak sample value
    ts_t  ts;    // time stamp of the first sample above threshold
  } event_t;

  // One coincidence record as written into the event memory.
  typedef struct packed {
    amp_t a1;
    amp_t a2;
    dt_t  dt;
  } record_t;

  // Host register map (word addresses).
  parameter int unsigned HOST_AW = 3;
  parameter int unsigned HOST_DW = 32;
  typedef enum logic [HOST_AW-1:0] {
    REG_CTRL    = 3'd0,  // W: bit0 run, bit1 flush (self-clearing). R: bit0 run
    REG_THRESH1 = 3'd1,  // R/W: lower threshold of channel 1
    REG_THRESH2 = 3'd2,  // R/W: lower threshold of channel 2
    REG_WINDOW  = 3'd3,  // R/W: coincidence window W in clock periods
    REG_STATUS  = 3'd4,  // R: bit31 overflow, bit30 empty, bits15:0 record count
    REG_DATA_A  = 3'd5,  // R: {A2 in 31:16, A1 in 15:0} of the oldest record
    REG_DATA_DT = 3'd6   // R: dt of the oldest record in 15:0, then pops it
  } reg_addr_e;

endpackage
