// Self-checking testbench of ddc32 (reduced filter and buffer sizes).
//
// All 32 channels sit on a baseline of 1000 counts with +-3 counts of noise.
// Pulses are injected on chosen channels: small short ones on channels 3, 17
// and 30 (S1-like), a long wide one on channel 9 (S2-like). Checked:
//  * the digital sum equals the testbench's own masked sum of the previous
//    cycle's samples, every cycle;
//  * the OR over time of the S1 hit vector is exactly the pulsed channels and
//    the peak S1 multiplicity is 3 (channel 9 pulses later); only channel 9 ever gives an S2 hit;
//  * multiplicity always equals the popcount of the hit vector;
//  * readout of a window returns header, every stored sample of every
//    channel in channel then time order (reference: the pulse-only keep
//    rule applied to the sample history), and an end word;
//  * the command FIFO refuses commands when full and the stream stalls
//    while out_ready is low.
module tb_ddc32;
  import lz_daq_pkg::*;
  localparam int unsigned S1_N = 6, S2_N = 10, DEPTH = 256, PRE = 2, POST = 3, CMDQ = 4;

  logic clk = 1'b0, rst_n = 1'b0, sync = 1'b0;
  logic [ADC_W-1:0] adc [N_CH];
  ddc_cfg_t cfg;
  ddc_tp_t tp;
  logic cmd_valid = 1'b0, cmd_ready, out_valid, out_ready = 1'b1;
  readout_cmd_t cmd;
  wave_word_t out_word;
  logic [15:0] ovf_cnt;

  int checks = 0, failures = 0;

  logic [BOARD_W-1:0] board_id = 6'd5;

  ddc32 #(.S1_N(S1_N), .S2_N(S2_N), .DEPTH(DEPTH), .PRE(PRE), .POST(POST),
          .CMD_DEPTH(CMDQ)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int hist [N_CH][$];     // samples per channel, index = timestamp
  int tnow = 0;           // timestamp of the sample being driven
  logic [N_CH-1:0] s1_seen = '0, s2_seen = '0;
  int max_s1_mult = 0;
  bit sum_on = 0;
  int prev_sum = 0;

  function automatic int pulse_val(int ch, int t);
    int v = 1000 + int'($urandom_range(0, 6)) - 3;
    if ((ch == 3 || ch == 17 || ch == 30) && t >= 100 && t < 103) v = 600;
    if (ch == 9 && t >= 140 && t < 160) v = 700;
    return v;
  endfunction

  // drive one sample on every channel and run the per-cycle checks
  task automatic cycle();
    int s;
    s = 0;
    for (int c = 0; c < int'(N_CH); c++) begin
      int v = pulse_val(c, tnow);
      adc[c] = ADC_W'(v);
      hist[c].push_back(v);
      if (cfg.sum_mask[c]) s += v;
    end
    @(posedge clk); #1;
    tnow++;
    if (sum_on) check(int'(tp.dsum) == s, $sformatf("dsum %0d want %0d", tp.dsum, s));
    sum_on = 1;
    s1_seen |= tp.s1_hits;
    s2_seen |= tp.s2_hits;
    if (int'(tp.s1_mult) > max_s1_mult) max_s1_mult = int'(tp.s1_mult);
    check(int'(tp.s1_mult) == $countones(tp.s1_hits) && int'(tp.s2_mult) == $countones(tp.s2_hits),
          "multiplicity = popcount");
  endtask

  // expected stored samples of one channel inside [a, b]
  function automatic void expect_ch(int ch, int a, int b, ref int ets[$], ref int es[$]);
    for (int t = a; t <= b; t++) begin
      bit k = 0;
      for (int c = t - int'(POST); c <= t + int'(PRE); c++)
        if (c >= 0 && c < hist[ch].size() && (1000 - hist[ch][c]) > 100) k = 1;
      // the last PRE samples may still be in the pre-trigger delay line
      if (k && t < hist[ch].size() - int'(PRE)) begin ets.push_back(t); es.push_back(hist[ch][t]); end
    end
  endfunction

  wave_word_t got[$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_word);

  initial begin
    cfg = '{s1_thr: 24'sd1000, s2_thr: 24'sd5000, baseline: 14'd1000, pod_thr: 14'd100,
            sum_mask: 32'hFFFF_0F0F};
    foreach (adc[i]) adc[i] = 14'd1000;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    sync = 1'b1; @(posedge clk); #1 sync = 1'b0;   // timestamp of the next sample is 0
    for (int i = 0; i < 300; i++) cycle();
    check(s1_seen == 32'h4002_0208, $sformatf("S1 hit channels %h", s1_seen));
    check(max_s1_mult == 3, $sformatf("peak S1 multiplicity %0d", max_s1_mult));
    check(s2_seen == 32'h0000_0200, $sformatf("S2 hit channels %h", s2_seen));

    // readout of [90, 200]
    begin
      int ets[$], es[$];
      automatic int idx = 1;
      got.delete();
      cmd = '{event_id: 24'd77, t_start: 32'd90, t_end: 32'd200};
      cmd_valid = 1'b1;
      check(cmd_ready == 1'b1, "command accepted");
      cycle();
      cmd_valid = 1'b0;
      while (!(got.size() > 0 && got[$].kind == W_EVT_END)) cycle();
      check(got[0].kind == W_EVT_HDR && got[0].ts == 32'd77 && got[0].board == 6'd5, "event header");
      for (int c = 0; c < int'(N_CH); c++) begin
        ets.delete(); es.delete();
        expect_ch(c, 90, 200, ets, es);
        foreach (ets[i]) begin
          check(idx < got.size() && got[idx].kind == W_SAMPLE && int'(got[idx].chan) == c &&
                int'(got[idx].ts) == ets[i] && int'(got[idx].sample) == es[i],
                $sformatf("ch %0d word %0d", c, i));
          idx++;
        end
      end
      check(idx == got.size() - 1, $sformatf("word count %0d vs %0d", idx + 1, got.size()));
      check(got.size() > 30, "some samples read out");
    end

    // back-pressure: with the stream stalled the command FIFO fills up
    out_ready = 1'b0;
    for (int i = 0; i < int'(CMDQ) + 2; i++) begin
      cmd = '{event_id: 24'(100 + i), t_start: 32'd90, t_end: 32'd110};
      cmd_valid = 1'b1;
      cycle();
    end
    cmd_valid = 1'b0;
    check(cmd_ready == 1'b0, "command FIFO full");
    begin
      automatic int n = got.size();
      repeat (20) cycle();
      check(got.size() == n, "no words while out_ready is low");
    end
    out_ready = 1'b1;
    begin
      automatic int ends = 0;
      got.delete();
      repeat (3000) begin
        cycle();
      end
      foreach (got[i]) if (got[i].kind == W_EVT_END) ends++;
      check(ends == int'(CMDQ), $sformatf("%0d queued events read out", ends));
    end
    check(ovf_cnt == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
