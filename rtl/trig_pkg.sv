// trig_pkg: types and constants shared by the trigger FPGA design.
//
// The trigger digitises the PMT majority-sum signal with a 12-bit ADC at
// 50 MS/s and runs one sample per 50 MHz clock through a peak-finding state
// machine. This package holds the sample width, the state encoding of that
// machine, the run-time configuration record (thresholds and wait times that
// are written over the UART port) and the register map of that port.
//
// The state names, the 12-bit sample width, the 20 ns clock period and the
// example threshold of 68 ADC counts follow the published description. The
// numeric defaults of every other configuration field, the field widths and
// the register addresses are this design's own choices; they are documented
// next to each constant.
package trig_pkg;

  localparam int unsigned SAMPLE_W = 12;   // ADC resolution
  localparam int unsigned TIME_W   = 24;   // wait-time counters, in 20 ns clocks (max 335 ms)
  localparam int unsigned CNT_W    = 16;   // peak counter width

  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef logic [TIME_W-1:0]   time_t;
  typedef logic [CNT_W-1:0]    count_t;

  // States of the main trigger algorithm (names as published).
  typedef enum logic [2:0] {
    ST_IDLE       = 3'd0,
    ST_PEAKUP     = 3'd1,
    ST_PEAKDOWN   = 3'd2,
    ST_DECIDE     = 3'd3,
    ST_WAIT       = 3'd4,
    ST_TRIGGER    = 3'd5,
    ST_TRIGWAIT   = 3'd6,
    ST_AFTERPULSE = 3'd7
  } trig_state_e;

  // Run-time configuration. Times are in clock cycles (20 ns each); the
  // accumulated time-over-threshold is in samples.
  typedef struct packed {
    sample_t threshold;     // sample must be larger than this to be "above"
    count_t  npeak_min;     // Decide: minimum number of peaks
    time_t   tot_min;       // Decide: minimum accumulated time-over-threshold
    sample_t amp_min;       // Decide: minimum peak amplitude
    time_t   peak_wait;     // Wait: cycles to wait for another peak
    time_t   trig_wait;     // TriggerWait: dead time after a trigger
    sample_t large_amp;     // amplitude above which the afterpulse wait is added
    time_t   ap_quiet;      // AfterPulse: quiet cycles that mark "back to baseline"
    time_t   dis_tot;       // discharge: accumulated ToT that identifies a discharge
    time_t   dis_gap;       // discharge: quiet cycles that end a pulse train
    time_t   dis_veto;      // discharge: veto length
  } trig_cfg_t;

  // Register map of the UART configuration port (addresses).
  localparam logic [7:0] REG_THRESHOLD = 8'h00;
  localparam logic [7:0] REG_NPEAK_MIN = 8'h01;
  localparam logic [7:0] REG_TOT_MIN   = 8'h02;
  localparam logic [7:0] REG_AMP_MIN   = 8'h03;
  localparam logic [7:0] REG_PEAK_WAIT = 8'h04;
  localparam logic [7:0] REG_TRIG_WAIT = 8'h05;
  localparam logic [7:0] REG_LARGE_AMP = 8'h06;
  localparam logic [7:0] REG_AP_QUIET  = 8'h07;
  localparam logic [7:0] REG_DIS_TOT   = 8'h08;
  localparam logic [7:0] REG_DIS_GAP   = 8'h09;
  localparam logic [7:0] REG_DIS_VETO  = 8'h0A;
  localparam int unsigned NUM_REGS     = 11;

  // Reset values. threshold = 68 is the published example; npeak_min,
  // tot_min and amp_min are chosen so that the published three-peak example
  // triggers on its third peak and not before. peak_wait = 500 ns ("several
  // hundred ns"), trig_wait = 2 ms ("several ms"); the rest are this design's.
  localparam trig_cfg_t CFG_DEFAULT = '{
    threshold: 12'd68,
    npeak_min: 16'd3,
    tot_min:   24'd5,
    amp_min:   12'd150,
    peak_wait: 24'd25,
    trig_wait: 24'd100_000,
    large_amp: 12'd3000,
    ap_quiet:  24'd2_500,
    dis_tot:   24'd1_000,
    dis_gap:   24'd250,
    dis_veto:  24'd500_000
  };

endpackage
