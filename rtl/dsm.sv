// Data Sparsification Master (DSM): the real-time event selection.
//
// Inputs are the per-cycle outputs of all DS boards. The DSM
//  * adds the S1 and S2 multiplicities of the boards of each detector group
//    (TPC low gain, TPC high gain, skin, outer detector);
//  * adds the digital sums of the groups selected in `cfg.sum_groups` into a
//    total sum waveform and runs it through its own S1 and S2 filters, which
//    measure the total pulse area;
//  * compares all of these with thresholds. Trigger sources (bit numbers as in
//    lz_daq_pkg): group S1 multiplicity [3:0], group S2 multiplicity [7:4],
//    total-sum S1 area [8], total-sum S2 area [9], external heartbeat [10],
//    external LED calibration sync [11]. Sources are enabled one by one in
//    `cfg.src_enable`, so each group can have its own selection.
// When an enabled source is active and no trigger has been issued in the last
// HOLDOFF cycles, a trigger (event number, timestamp, active sources) is
// issued for one cycle, together with a record of the sparsification
// quantities at that moment (multiplicities per group, total-sum filter
// outputs), which is to be stored with the event. Triggers are counted, and
// requests that fall into the hold-off window are counted as suppressed.
// HOLDOFF = 400 cycles follows from the paper's maximum event rate of about
// 250 kHz at 100 MHz. The threshold comparisons, the source list layout and
// the hold-off rule are this design's choices; the paper leaves the selection
// criteria open (S1/S2 discrimination "being worked on").
module dsm
  import lz_daq_pkg::*;
#(
  parameter int unsigned N_DS     = 6,
  parameter int unsigned DS_GROUP [N_DS] = '{0, 0, 1, 1, 2, 3},
  parameter int unsigned S1_N     = 6,
  parameter int unsigned S2_N     = 50,
  parameter int unsigned HOLDOFF  = 400
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sync,
  input  ds_tp_t           ds_in [N_DS],
  input  logic             ext_heartbeat,
  input  logic             ext_led,
  // configuration
  input  logic [MULT_W-1:0] s1_mult_thr [N_GROUPS],
  input  logic [MULT_W-1:0] s2_mult_thr [N_GROUPS],
  input  logic signed [31:0] sum_s1_thr,
  input  logic signed [31:0] sum_s2_thr,
  input  logic [N_GROUPS-1:0] sum_groups,
  input  logic [N_TRIG_SRC-1:0] src_enable,
  // outputs
  output logic             trig_valid,
  output trigger_t         trig,
  output ds_record_t       record,
  output logic [31:0]      n_triggers,
  output logic [31:0]      n_suppressed
);
  localparam int unsigned S1_W = SUM_W + $clog2(3*S1_N) + 4;
  localparam int unsigned S2_W = SUM_W + $clog2(6*S2_N) + 4;
  localparam int unsigned HW   = $clog2(HOLDOFF + 1);

  logic [TS_W-1:0] ts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ts <= '0;
    else if (sync) ts <= '0;
    else           ts <= ts + 1'b1;
  end

  // group multiplicities and total sum
  logic [MULT_W-1:0] g_s1 [N_GROUPS];
  logic [MULT_W-1:0] g_s2 [N_GROUPS];
  logic [SUM_W-1:0]  total_c, total;
  always_comb begin
    for (int g = 0; g < int'(N_GROUPS); g++) begin
      g_s1[g] = '0;
      g_s2[g] = '0;
    end
    total_c = '0;
    for (int i = 0; i < int'(N_DS); i++) begin
      g_s1[DS_GROUP[i]] += ds_in[i].s1_mult;
      g_s2[DS_GROUP[i]] += ds_in[i].s2_mult;
      if (sum_groups[DS_GROUP[i]]) total_c += ds_in[i].dsum;
    end
  end

  logic [MULT_W-1:0] g_s1_q [N_GROUPS];
  logic [MULT_W-1:0] g_s2_q [N_GROUPS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total <= '0;
      for (int g = 0; g < int'(N_GROUPS); g++) begin g_s1_q[g] <= '0; g_s2_q[g] <= '0; end
    end else begin
      total <= total_c;
      for (int g = 0; g < int'(N_GROUPS); g++) begin g_s1_q[g] <= g_s1[g]; g_s2_q[g] <= g_s2[g]; end
    end
  end

  // total-sum filters
  logic signed [S1_W-1:0] sum_s1;
  logic signed [S2_W-1:0] sum_s2;
  logic sum_s1_ok, sum_s2_ok;
  s1_filter #(.IN_W(SUM_W), .N(S1_N)) u_sum_s1 (
    .clk, .rst_n, .en(1'b1), .din(total), .area_x2(sum_s1), .valid(sum_s1_ok));
  s2_filter #(.IN_W(SUM_W), .N(S2_N)) u_sum_s2 (
    .clk, .rst_n, .en(1'b1), .din(total), .area_x2(sum_s2), .valid(sum_s2_ok));

  // trigger conditions
  logic [N_TRIG_SRC-1:0] cond, active;
  always_comb begin
    cond = '0;
    for (int g = 0; g < int'(N_GROUPS); g++) begin
      cond[g]     = (g_s1_q[g] >= s1_mult_thr[g]) && (s1_mult_thr[g] != '0);
      cond[4 + g] = (g_s2_q[g] >= s2_mult_thr[g]) && (s2_mult_thr[g] != '0);
    end
    cond[8]  = sum_s1_ok && (64'(sum_s1) > 64'(sum_s1_thr));
    cond[9]  = sum_s2_ok && (64'(sum_s2) > 64'(sum_s2_thr));
    cond[10] = ext_heartbeat;
    cond[11] = ext_led;
    active   = cond & src_enable;
  end

  logic [HW-1:0]    hold;
  logic [EVT_W-1:0] evt;
  logic             fire;
  assign fire = (active != '0) && (hold == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold         <= '0;
      evt          <= '0;
      trig_valid   <= 1'b0;
      trig         <= '0;
      record       <= '0;
      n_triggers   <= '0;
      n_suppressed <= '0;
    end else begin
      trig_valid <= fire;
      if (fire) begin
        hold        <= HW'(HOLDOFF - 1);
        evt         <= evt + 1'b1;
        n_triggers  <= n_triggers + 1'b1;
        trig        <= '{event_id: evt, ts: ts, sources: active};
        record.trig <= '{event_id: evt, ts: ts, sources: active};
        for (int g = 0; g < int'(N_GROUPS); g++) begin
          record.s1_mult[g*MULT_W +: MULT_W] <= g_s1_q[g];
          record.s2_mult[g*MULT_W +: MULT_W] <= g_s2_q[g];
        end
        record.sum_s1_x2 <= (SUM_W+12)'(sum_s1);
        record.sum_s2_x2 <= (SUM_W+12)'(sum_s2);
      end else if (hold != '0) begin
        hold <= hold - 1'b1;
        if (active != '0) n_suppressed <= n_suppressed + 1'b1;
      end
    end
  end
endmodule
