// DDC-32 digitizer logic: 32 channels of real-time filtering, trigger
// primitives, pulse-only waveform buffering and event readout.
//
// Every cycle each channel takes one 14-bit ADC sample (100 MHz). Per channel
// an S1 filter and an S2 filter measure pulse area with the baseline removed;
// comparing them with the board's thresholds gives an S1 and an S2 hit bit.
// The 32 hit bits of each kind (hit vectors), their counts (multiplicities)
// and a digital sum of the raw samples of the channels selected by
// `cfg.sum_mask` form the trigger primitives `tp`, sent every cycle to the
// board's Data Sparsification (DS) board. The same samples go into each
// channel's pulse-only circular buffer (pod_buffer), stamped with the local
// timestamp, which `sync` clears on all boards at once.
//
// Readout: commands (event number and time window) from the DAQ Master queue
// in a small FIFO; `cmd_ready` is low when it is full. For each command the
// board sends an event-header word, then each channel's stored samples inside
// the window (channel 0 first), then an event-end word, on a valid/ready
// stream of 64-bit wave_word_t words.
//
// Timing: tp.dsum is the sum of the samples of the previous cycle; hit bits
// follow the filters' two-cycle latency plus one register (three cycles).
// From the paper: 32 channels, 14 bits at 100 MHz, S1/S2 filters, hit and
// multiplicity vectors, a digital sum of all or selected channels, circular
// waveform buffers off-loaded on selection. Thresholds as single per-board
// values, the word formats and the sequential channel readout are this
// design's choices.
module ddc32
  import lz_daq_pkg::*;
#(
  parameter int unsigned S1_N     = 6,
  parameter int unsigned S2_N     = 50,
  parameter int unsigned DEPTH    = 4096,
  parameter int unsigned PRE      = 8,
  parameter int unsigned POST     = 8,
  parameter int unsigned CMD_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sync,
  input  logic [BOARD_W-1:0] board_id,   // this board's number, put in every word
  input  logic [ADC_W-1:0] adc [N_CH],
  input  ddc_cfg_t         cfg,
  output ddc_tp_t          tp,
  // readout commands
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  readout_cmd_t     cmd,
  // waveform stream
  output logic             out_valid,
  input  logic             out_ready,
  output wave_word_t       out_word,
  // status
  output logic [15:0]      ovf_cnt
);
  localparam int unsigned S1_W = ADC_W + $clog2(3*S1_N) + 4;
  localparam int unsigned S2_W = ADC_W + $clog2(6*S2_N) + 4;

  logic [TS_W-1:0] ts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ts <= '0;
    else if (sync) ts <= '0;
    else           ts <= ts + 1'b1;
  end

  // ---------------- per-channel processing ----------------
  logic signed [S1_W-1:0] s1_y [N_CH];
  logic signed [S2_W-1:0] s2_y [N_CH];
  logic [N_CH-1:0] s1_ok, s2_ok, s1_hit, s2_hit;

  logic [N_CH-1:0] ch_start, ch_done, ch_valid, ch_ready;
  logic [TS_W-1:0] ch_ts  [N_CH];
  logic [ADC_W-1:0] ch_s  [N_CH];
  logic [15:0]     ch_ovf [N_CH];
  logic [15:0]     ch_stored [N_CH];
  logic [N_CH-1:0] ch_busy;
  readout_cmd_t    cur;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    s1_filter #(.IN_W(ADC_W), .N(S1_N)) u_s1 (
      .clk, .rst_n, .en(1'b1), .din(adc[c]), .area_x2(s1_y[c]), .valid(s1_ok[c]));
    s2_filter #(.IN_W(ADC_W), .N(S2_N)) u_s2 (
      .clk, .rst_n, .en(1'b1), .din(adc[c]), .area_x2(s2_y[c]), .valid(s2_ok[c]));
    assign s1_hit[c] = s1_ok[c] && (s1_y[c] > S1_W'(cfg.s1_thr));
    assign s2_hit[c] = s2_ok[c] && (s2_y[c] > S2_W'(cfg.s2_thr));

    pod_buffer #(.DEPTH(DEPTH), .PRE(PRE), .POST(POST)) u_buf (
      .clk, .rst_n, .en(1'b1), .ts, .din(adc[c]),
      .baseline(cfg.baseline), .pod_thr(cfg.pod_thr),
      .rd_start(ch_start[c]), .t_start(cur.t_start), .t_end(cur.t_end),
      .rd_busy(ch_busy[c]), .rd_done(ch_done[c]),
      .out_valid(ch_valid[c]), .out_ready(ch_ready[c]),
      .out_ts(ch_ts[c]), .out_sample(ch_s[c]),
      .ovf_cnt(ch_ovf[c]), .stored_cnt(ch_stored[c]));
  end

  // ---------------- trigger primitives ----------------
  function automatic logic [5:0] popcount(input logic [N_CH-1:0] v);
    logic [5:0] n = '0;
    for (int i = 0; i < int'(N_CH); i++) n += 6'(v[i]);
    return n;
  endfunction

  logic [SUM_W-1:0] dsum_c;
  always_comb begin
    dsum_c = '0;
    for (int i = 0; i < int'(N_CH); i++)
      if (cfg.sum_mask[i]) dsum_c += SUM_W'(adc[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tp <= '0;
    else begin
      tp.s1_hits <= s1_hit;
      tp.s2_hits <= s2_hit;
      tp.s1_mult <= popcount(s1_hit);
      tp.s2_mult <= popcount(s2_hit);
      tp.dsum    <= dsum_c;
    end
  end

  // overflow status: any channel's overwrite counter, summed, saturating
  logic [20:0] ovf_acc;
  always_comb begin
    ovf_acc = '0;
    for (int i = 0; i < int'(N_CH); i++) ovf_acc += 21'(ch_ovf[i]);
    ovf_cnt = (ovf_acc > 21'hFFFF) ? 16'hFFFF : ovf_acc[15:0];
  end

  // ---------------- readout ----------------
  logic         q_valid, q_pop;
  readout_cmd_t q_cmd;
  sync_fifo #(.WIDTH($bits(readout_cmd_t)), .DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_cmd), .level());

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_START, S_FWD, S_END} ostate_e;
  ostate_e    ost;
  logic [4:0] ch;

  assign cur = q_cmd;

  always_comb begin
    out_valid = 1'b0;
    out_word  = '0;
    out_word.board = board_id;
    out_word.chan  = ch;
    ch_ready  = '0;
    ch_start  = '0;
    q_pop     = 1'b0;
    unique case (ost)
      S_HDR: begin
        out_valid     = 1'b1;
        out_word.kind = W_EVT_HDR;
        out_word.ts   = TS_W'(q_cmd.event_id);
      end
      S_START: ch_start[ch] = 1'b1;
      S_FWD: begin
        out_valid       = ch_valid[ch];
        out_word.kind   = W_SAMPLE;
        out_word.ts     = ch_ts[ch];
        out_word.sample = ch_s[ch];
        ch_ready[ch]    = out_ready;
      end
      S_END: begin
        out_valid     = 1'b1;
        out_word.kind = W_EVT_END;
        out_word.ts   = TS_W'(q_cmd.event_id);
        q_pop         = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ost <= S_IDLE;
      ch  <= '0;
    end else begin
      unique case (ost)
        S_IDLE:  if (q_valid) ost <= S_HDR;
        S_HDR:   if (out_ready) begin ch <= '0; ost <= S_START; end
        S_START: ost <= S_FWD;
        S_FWD:   if (ch_done[ch]) begin
                   if (ch == 5'(N_CH - 1)) ost <= S_END;
                   else begin ch <= ch + 1'b1; ost <= S_START; end
                 end
        S_END:   if (out_ready) ost <= S_IDLE;
        default: ost <= S_IDLE;
      endcase
    end
  end
endmodule
