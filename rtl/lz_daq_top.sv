// LZ data acquisition system: digitizers, data sparsification (trigger) side
// and data collection (readout) side on one common clock.
//
// The detector's channels arrive in four groups (Fig. 3 of the paper's
// system view): TPC low gain, TPC high gain, skin and outer detector. Each
// group has its own DDC-32 digitizers (16, 16, 6, 4: 1344 channel inputs for
// the 1276 channels in use), Data Sparsification boards (2, 2, 1, 1) and Data
// Extractors (6, 6, 1, 1: fourteen Ethernet links to fourteen Data
// Collectors). Digitizers are split evenly and in order among their group's
// DS boards (8 per DS in the TPC) and Data Extractors (3 per DE in the TPC,
// the last TPC DE getting one).
//
// Data flow:
//   ADC samples -> ddc32 (filters, hit vectors, pulse-only buffers)
//   ddc32 trigger primitives -> ds_board -> dsm (group multiplicities, total
//   sum and its filters, external triggers) -> trigger
//   trigger -> daq_master -> readout command broadcast to every ddc32
//   ddc32 waveform words -> data_extractor -> UDP/Ethernet byte stream.
// The DSM's record of each trigger (multiplicities, total-sum areas) leaves
// on `rec_valid`/`record`, to be merged with the event downstream.
//
// What is not logic here: the ADCs (samples enter on `adc`), the HDMI serial
// links between boards (replaced by direct parallel connections, all boards
// on one clock), the Data Collector computers (they receive `eth_*`) and the
// board control processors (configuration enters as ports).
// Board counts come from the paper; the board-to-board mapping, the single
// clock domain and the configuration ports are this design's choices.
module lz_daq_top
  import lz_daq_pkg::*;
#(
  parameter int unsigned N_DDC_G [N_GROUPS] = GRP_N_DDC,
  parameter int unsigned N_DS_G  [N_GROUPS] = GRP_N_DS,
  parameter int unsigned N_DE_G  [N_GROUPS] = GRP_N_DE,
  parameter int unsigned S1_N       = 6,
  parameter int unsigned S2_N       = 50,
  parameter int unsigned DEPTH      = 4096,
  parameter int unsigned PRE        = 8,
  parameter int unsigned POST       = 8,
  parameter int unsigned MAX_WORDS  = 180,
  parameter int unsigned PRE_WIN    = 100,
  parameter int unsigned POST_WIN   = 300,
  parameter int unsigned TRIG_DEPTH = 16,
  parameter int unsigned HOLDOFF    = 400,
  // derived sizes
  parameter int unsigned N_DDC_TOT = N_DDC_G[0] + N_DDC_G[1] + N_DDC_G[2] + N_DDC_G[3],
  parameter int unsigned N_DS_TOT  = N_DS_G[0] + N_DS_G[1] + N_DS_G[2] + N_DS_G[3],
  parameter int unsigned N_DE_TOT  = N_DE_G[0] + N_DE_G[1] + N_DE_G[2] + N_DE_G[3]
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run_start,
  input  logic [ADC_W-1:0] adc [N_DDC_TOT][N_CH],
  // configuration
  input  ddc_cfg_t         ddc_cfg [N_GROUPS],
  input  logic [MULT_W-1:0] s1_mult_thr [N_GROUPS],
  input  logic [MULT_W-1:0] s2_mult_thr [N_GROUPS],
  input  logic signed [31:0] sum_s1_thr,
  input  logic signed [31:0] sum_s2_thr,
  input  logic [N_GROUPS-1:0] sum_groups,
  input  logic [N_TRIG_SRC-1:0] src_enable,
  input  logic             ext_heartbeat,
  input  logic             ext_led,
  // Ethernet byte streams to the Data Collectors
  output logic             eth_tx_en [N_DE_TOT],
  output logic [7:0]       eth_txd   [N_DE_TOT],
  // sparsification record of each trigger
  output logic             rec_valid,
  output ds_record_t       record,
  // status
  output logic [31:0]      n_triggers,
  output logic [31:0]      n_suppressed,
  output logic [31:0]      n_issued,
  output logic [31:0]      n_dropped,
  output logic [15:0]      ddc_ovf [N_DDC_TOT]
);
  function automatic int unsigned off(input int unsigned a [N_GROUPS], input int g);
    int unsigned s = 0;
    for (int i = 0; i < g; i++) s += a[i];
    return s;
  endfunction

  typedef int unsigned ds_group_t [N_DS_TOT];
  function automatic ds_group_t ds_groups();
    ds_group_t r;
    int k = 0;
    for (int g = 0; g < int'(N_GROUPS); g++)
      for (int j = 0; j < int'(N_DS_G[g]); j++) begin r[k] = g; k++; end
    return r;
  endfunction
  localparam ds_group_t DS_GROUP = ds_groups();

  logic sync;
  ddc_tp_t      ddc_tp   [N_DDC_TOT];
  logic         ddc_cmd_ready [N_DDC_TOT];
  logic         ddc_ovalid [N_DDC_TOT];
  logic         ddc_oready [N_DDC_TOT];
  wave_word_t   ddc_oword  [N_DDC_TOT];
  ds_tp_t       ds_tp    [N_DS_TOT];
  logic         cmd_valid, cmd_ready;
  readout_cmd_t cmd;
  logic         trig_valid;
  trigger_t     trig;

  // ---------------- detector groups ----------------
  for (genvar g = 0; g < int'(N_GROUPS); g++) begin : g_grp
    localparam int unsigned ND  = N_DDC_G[g];
    localparam int unsigned NS  = N_DS_G[g];
    localparam int unsigned NE  = N_DE_G[g];
    localparam int unsigned DO  = off(N_DDC_G, g);
    localparam int unsigned SO  = off(N_DS_G, g);
    localparam int unsigned EO  = off(N_DE_G, g);
    localparam int unsigned KS  = (ND + NS - 1) / NS;   // digitizers per DS
    localparam int unsigned KE  = (ND + NE - 1) / NE;   // digitizers per DE

    for (genvar d = 0; d < int'(ND); d++) begin : g_ddc
      ddc32 #(.S1_N(S1_N), .S2_N(S2_N), .DEPTH(DEPTH),
              .PRE(PRE), .POST(POST)) u_ddc (
        .clk, .rst_n, .sync, .board_id(BOARD_W'(DO + d)),
        .adc(adc[DO + d]), .cfg(ddc_cfg[g]), .tp(ddc_tp[DO + d]),
        .cmd_valid(cmd_valid && cmd_ready), .cmd_ready(ddc_cmd_ready[DO + d]), .cmd,
        .out_valid(ddc_ovalid[DO + d]), .out_ready(ddc_oready[DO + d]),
        .out_word(ddc_oword[DO + d]), .ovf_cnt(ddc_ovf[DO + d]));
    end

    for (genvar j = 0; j < int'(NS); j++) begin : g_ds
      localparam int unsigned FIRST = j * KS;
      localparam int unsigned CNT   = (ND - FIRST < KS) ? ND - FIRST : KS;
      ddc_tp_t tp_in [CNT];
      for (genvar k = 0; k < int'(CNT); k++) begin : g_in
        assign tp_in[k] = ddc_tp[DO + FIRST + k];
      end
      ds_board #(.N_IN(CNT)) u_ds (
        .clk, .rst_n, .tp_in, .tp_out(ds_tp[SO + j]), .hits_s1(), .hits_s2());
    end

    for (genvar e = 0; e < int'(NE); e++) begin : g_de
      localparam int unsigned FIRST = e * KE;
      localparam int unsigned CNT   = (ND - FIRST < KE) ? ND - FIRST : KE;
      logic       v [CNT];
      logic       r [CNT];
      wave_word_t w [CNT];
      for (genvar k = 0; k < int'(CNT); k++) begin : g_in
        assign v[k] = ddc_ovalid[DO + FIRST + k];
        assign w[k] = ddc_oword[DO + FIRST + k];
        assign ddc_oready[DO + FIRST + k] = r[k];
      end
      // link addresses: locally administered MACs 02:00:00:00:0x:nn and
      // 192.168.10.(2n+1) -> 192.168.10.(2n+2) for link n
      data_extractor #(.N_IN(CNT), .MAX_WORDS(MAX_WORDS)) u_de (
        .clk, .rst_n,
        .src_mac(48'h02_00_00_00_00_00 | 48'(EO + e)),
        .dst_mac(48'h02_00_00_00_01_00 | 48'(EO + e)),
        .src_ip(32'hC0A8_0A00 | 32'(2*(EO + e) + 1)),
        .dst_ip(32'hC0A8_0A00 | 32'(2*(EO + e) + 2)), .in_valid(v), .in_ready(r), .in_word(w),
        .tx_en(eth_tx_en[EO + e]), .txd(eth_txd[EO + e]), .n_packets(), .n_events());
    end
  end

  // every digitizer must be able to queue the broadcast command
  always_comb begin
    cmd_ready = 1'b1;
    for (int i = 0; i < int'(N_DDC_TOT); i++) cmd_ready &= ddc_cmd_ready[i];
  end

  // ---------------- sparsification master and DAQ master ----------------
  dsm #(.N_DS(N_DS_TOT), .DS_GROUP(DS_GROUP), .S1_N(S1_N), .S2_N(S2_N), .HOLDOFF(HOLDOFF)) u_dsm (
    .clk, .rst_n, .sync, .ds_in(ds_tp), .ext_heartbeat, .ext_led,
    .s1_mult_thr, .s2_mult_thr, .sum_s1_thr, .sum_s2_thr, .sum_groups, .src_enable,
    .trig_valid, .trig, .record, .n_triggers, .n_suppressed);

  assign rec_valid = trig_valid;

  daq_master #(.PRE_WIN(PRE_WIN), .POST_WIN(POST_WIN), .TRIG_DEPTH(TRIG_DEPTH)) u_dm (
    .clk, .rst_n, .run_start, .sync, .trig_valid, .trig,
    .cmd_valid, .cmd_ready, .cmd, .n_issued, .n_dropped, .queue_level());
endmodule
