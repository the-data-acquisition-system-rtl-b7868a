// Shared constants and types of the LZ data acquisition logic.
//
// All boards run on one 100 MHz sample clock (one ADC sample per channel per
// cycle) and keep local copies of one timestamp counter that the DAQ Master
// clears with a common sync pulse. The types below are the words that travel
// between boards: per-cycle trigger primitives (digitizer -> sparsification
// board -> sparsification master), time-window readout commands (DAQ Master ->
// digitizers) and 64-bit waveform words (digitizer -> data extractor).
// The 14-bit / 32-channel / 100 MHz numbers and the board counts per detector
// group follow the paper; widths of timestamps, sums and counters, and the
// layout of every word, are this design's own choices.
package lz_daq_pkg;

  localparam int unsigned ADC_W      = 14;   // ADC resolution
  localparam int unsigned N_CH       = 32;   // channels per DDC-32 digitizer
  localparam int unsigned TS_W       = 32;   // timestamp width (10 ns ticks)
  localparam int unsigned EVT_W      = 24;   // event number width
  localparam int unsigned SUM_W      = 26;   // width of any digital-sum waveform
  localparam int unsigned MULT_W     = 11;   // multiplicity counters (up to 1344)
  localparam int unsigned BOARD_W    = 6;    // digitizer board number

  // Detector groups (Fig. 3 columns); the dual-gain TPC gives two groups.
  localparam int unsigned N_GROUPS   = 4;
  typedef enum logic [1:0] {
    GRP_TPC_LOW  = 2'd0,
    GRP_TPC_HIGH = 2'd1,
    GRP_SKIN     = 2'd2,
    GRP_OD       = 2'd3
  } group_e;

  // Board counts per group: DDC-32 digitizers, DS boards, DE/DC pairs.
  localparam int unsigned GRP_N_DDC [N_GROUPS] = '{16, 16, 6, 4};
  localparam int unsigned GRP_N_DS  [N_GROUPS] = '{2, 2, 1, 1};
  localparam int unsigned GRP_N_DE  [N_GROUPS] = '{6, 6, 1, 1};

  // Per-cycle trigger primitives of one DDC-32.
  typedef struct packed {
    logic [N_CH-1:0]  s1_hits;   // channel's S1 filter above threshold
    logic [N_CH-1:0]  s2_hits;   // channel's S2 filter above threshold
    logic [5:0]       s1_mult;   // popcount of s1_hits
    logic [5:0]       s2_mult;   // popcount of s2_hits
    logic [SUM_W-1:0] dsum;      // sum of the selected channels' raw samples
  } ddc_tp_t;

  // Per-cycle output of a DS board.
  typedef struct packed {
    logic [MULT_W-1:0] s1_mult;
    logic [MULT_W-1:0] s2_mult;
    logic [SUM_W-1:0]  dsum;
  } ds_tp_t;

  // Digitizer configuration (one set per board).
  typedef struct packed {
    logic signed [23:0] s1_thr;    // hit threshold on 2x S1 filter output
    logic signed [23:0] s2_thr;    // hit threshold on 2x S2 filter output
    logic [ADC_W-1:0]   baseline;  // nominal baseline for pulse suppression
    logic [ADC_W-1:0]   pod_thr;   // store a sample when baseline-sample > pod_thr
    logic [N_CH-1:0]    sum_mask;  // channels that enter the digital sum
  } ddc_cfg_t;

  // Readout command: all samples with t_start <= timestamp <= t_end.
  typedef struct packed {
    logic [EVT_W-1:0] event_id;
    logic [TS_W-1:0]  t_start;
    logic [TS_W-1:0]  t_end;
  } readout_cmd_t;

  // 64-bit waveform word from a digitizer.
  typedef enum logic [1:0] {
    W_EVT_HDR = 2'd1,   // ts field holds the event number, sample field unused
    W_SAMPLE  = 2'd2,   // one stored sample with its timestamp
    W_EVT_END = 2'd3    // ts field holds the event number
  } word_kind_e;

  typedef struct packed {
    word_kind_e         kind;
    logic [BOARD_W-1:0] board;
    logic [4:0]         chan;
    logic [4:0]         rsvd;
    logic [TS_W-1:0]    ts;
    logic [ADC_W-1:0]   sample;
  } wave_word_t;   // 2+6+5+5+32+14 = 64 bits

  // Trigger sources of the DSM, one bit each in a trigger type mask.
  localparam int unsigned N_TRIG_SRC = 12;
  //  [3:0]  S1 multiplicity of group g reached its threshold
  //  [7:4]  S2 multiplicity of group g reached its threshold
  //  [8]    S1 filter of the total sum above threshold
  //  [9]    S2 filter of the total sum above threshold
  //  [10]   external heartbeat
  //  [11]   external LED calibration sync

  typedef struct packed {
    logic [EVT_W-1:0]      event_id;
    logic [TS_W-1:0]       ts;
    logic [N_TRIG_SRC-1:0] sources;
  } trigger_t;

  // Summary of the sparsification information at the time of a trigger.
  typedef struct packed {
    trigger_t                       trig;
    logic [N_GROUPS*MULT_W-1:0]     s1_mult;   // per group
    logic [N_GROUPS*MULT_W-1:0]     s2_mult;   // per group
    logic signed [SUM_W+12-1:0]     sum_s1_x2; // total-sum S1 filter
    logic signed [SUM_W+12-1:0]     sum_s2_x2; // total-sum S2 filter
  } ds_record_t;

  // Signed "a is earlier than b" for wrapping timestamps.
  function automatic logic ts_before(input logic [TS_W-1:0] a, input logic [TS_W-1:0] b);
    logic [TS_W-1:0] d;
    d = a - b;
    return d[TS_W-1];
  endfunction

endpackage
