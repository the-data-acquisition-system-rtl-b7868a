// End-to-end testbench of lz_daq_top at reduced size: groups of 2, 2, 1, 1
// digitizers, one DS board per group, 2+1+1+1 Data Extractors, S2 filter
// N=10, 128-word channel buffers, short readout windows, a trigger queue of
// two and a hold-off of 100 cycles.
//
// Every ADC input carries a deterministic baseline (1000 counts plus a
// little pattern noise) with scheduled pulses. The scenario provokes, in
// order: a group S1-multiplicity trigger (10 channels of the first TPC
// board), a group S2-multiplicity trigger (skin board, long pulses), the LED
// and heartbeat external triggers, a total-sum S1 trigger (one large short
// pulse), a total-sum S2 trigger (one long pulse), a burst of heartbeats that
// falls partly inside the hold-off and overfills the readout path (DAQ Master
// stall and dropped triggers), and a pulse long enough to overflow a
// channel buffer. All Ethernet frames of all links are parsed and their
// CRC-32 checked; every sample word is compared with the value the
// generator put on that input at that time; for the first event the complete
// set of stored samples of the pulsed channels is checked; every link must
// report every issued event exactly once. Each mechanism is counted, and one
// that never happens counts as a failure.
module tb_lz_daq_top;
  import lz_daq_pkg::*;
  localparam int unsigned N_DDC_G [N_GROUPS] = '{2, 2, 1, 1};
  localparam int unsigned N_DS_G  [N_GROUPS] = '{1, 1, 1, 1};
  localparam int unsigned N_DE_G  [N_GROUPS] = '{2, 1, 1, 1};
  localparam int unsigned NDDC = 6, NDE = 5;
  localparam int unsigned PRE = 2, POST = 3, PRE_WIN = 20, POST_WIN = 60;

  logic clk = 1'b0, rst_n = 1'b0, run_start = 1'b0;
  logic [ADC_W-1:0] adc [NDDC][N_CH];
  ddc_cfg_t ddc_cfg [N_GROUPS];
  logic [MULT_W-1:0] s1_mult_thr [N_GROUPS];
  logic [MULT_W-1:0] s2_mult_thr [N_GROUPS];
  logic signed [31:0] sum_s1_thr = 32'sd10000, sum_s2_thr = 32'sd20000;
  logic [N_GROUPS-1:0] sum_groups = 4'b0011;
  logic [N_TRIG_SRC-1:0] src_enable = '1;
  logic ext_heartbeat = 1'b0, ext_led = 1'b0;
  logic eth_tx_en [NDE];
  logic [7:0] eth_txd [NDE];
  logic rec_valid;
  ds_record_t record;
  logic [31:0] n_triggers, n_suppressed, n_issued, n_dropped;
  logic [15:0] ddc_ovf [NDDC];

  int checks = 0, failures = 0;

  lz_daq_top #(
    .N_DDC_G(N_DDC_G), .N_DS_G(N_DS_G), .N_DE_G(N_DE_G),
    .S2_N(10), .DEPTH(128), .PRE(PRE), .POST(POST), .MAX_WORDS(16),
    .PRE_WIN(PRE_WIN), .POST_WIN(POST_WIN), .TRIG_DEPTH(2), .HOLDOFF(100)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- signal generator ----------------
  localparam int T_S1 = 400, T_S2 = 900, T_LED = 1300, T_HB = 1500, T_SUM1 = 1700,
                 T_SUM2 = 1900, T_BURST = 2300, T_OVF = 4000;
  function automatic int sig(int b, int c, int t);
    int v = 1000 + ((b * 131 + c * 17 + t * 7) % 7) - 3;
    if (b == 0 && c < 10 && t >= T_S1 && t < T_S1 + 3) v -= 400;            // S1 multiplicity
    if (b == 4 && c < 5 && t >= T_S2 && t < T_S2 + 40) v -= 300;             // S2 multiplicity
    if (b == 2 && c == 0 && t >= T_SUM1 && t < T_SUM1 + 3) v -= 3000;        // total-sum S1
    if (b == 3 && c == 0 && t >= T_SUM2 && t < T_SUM2 + 30) v -= 1000;       // total-sum S2
    if (b == 5 && c == 1 && t >= T_OVF && t < T_OVF + 200) v -= 200;         // buffer overflow
    return v;
  endfunction

  int now = 0;
  bit running = 0;
  always @(posedge clk) now <= dut.sync ? 0 : now + 1;
  always @(negedge clk)
    for (int b = 0; b < int'(NDDC); b++)
      for (int c = 0; c < int'(N_CH); c++)
        adc[b][c] = ADC_W'(running ? sig(b, c, now) : 1000);

  // ---------------- mechanism counters ----------------
  int n_src [N_TRIG_SRC];
  int n_stall = 0, n_split = 0, n_frames = 0;
  always @(posedge clk) if (rst_n) begin
    if (rec_valid) for (int i = 0; i < int'(N_TRIG_SRC); i++) if (record.trig.sources[i]) n_src[i]++;
    if (dut.cmd_valid && !dut.cmd_ready) n_stall++;
  end

  // ---------------- Ethernet frame checker, one per link ----------------
  function automatic logic [31:0] crc_serial(input byte unsigned b[$]);
    logic [31:0] r = 32'hFFFF_FFFF;
    foreach (b[k])
      for (int j = 0; j < 8; j++) begin
        logic fb = r[0] ^ b[k][j];
        r = r >> 1;
        if (fb) r = r ^ 32'hEDB8_8320;
      end
    return ~r;
  endfunction

  int ev_done [NDE][$];       // events completed per link
  int ev0_words [NDDC][N_CH]; // sample words of event 0 per board/channel
  int n_samples = 0;

  task automatic parse(int link, byte unsigned fr[$]);
    automatic byte unsigned body[$];
    automatic int nw, ev;
    for (int k = 8; k < fr.size() - 4; k++) body.push_back(fr[k]);
    check(fr[7] == 8'hD5 && {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]}
          == crc_serial(body), "frame SFD and CRC");
    nw = {body[48], body[49]};
    ev = {body[42], body[43], body[44]};
    check(body.size() == 50 + 8 * nw, "frame length");
    n_frames++;
    if (body[45][0]) ev_done[link].push_back(ev); else n_split++;
    for (int k = 0; k < nw; k++) begin
      wave_word_t x;
      for (int j = 0; j < 8; j++) x[(7-j)*8 +: 8] = body[50 + 8*k + j];
      if (x.kind == W_SAMPLE) begin
        n_samples++;
        check(int'(x.sample) == sig(int'(x.board), int'(x.chan), int'(x.ts)),
              $sformatf("sample b%0d c%0d t%0d = %0d", x.board, x.chan, x.ts, x.sample));
        if (ev == 0) ev0_words[x.board][x.chan]++;
      end else check(int'(x.ts) == ev, "header/end word carries the event number");
    end
  endtask

  for (genvar l = 0; l < int'(NDE); l++) begin : g_mon
    byte unsigned fr[$];
    bit inf = 0;
    always @(posedge clk) if (rst_n) begin
      if (eth_tx_en[l]) begin
        if (!inf) fr.delete();
        inf = 1; fr.push_back(eth_txd[l]);
      end else begin
        if (inf) parse(l, fr);
        inf = 0;
      end
    end
  end

  task automatic pulse_in(ref logic sig_r);
    sig_r = 1'b1; @(posedge clk); #1 sig_r = 1'b0;
  endtask

  initial begin
    foreach (n_src[i]) n_src[i] = 0;
    for (int g = 0; g < int'(N_GROUPS); g++) begin
      ddc_cfg[g] = '{s1_thr: 24'sd1000, s2_thr: 24'sd4000, baseline: 14'd1000, pod_thr: 14'd100,
                     sum_mask: '1};
      s1_mult_thr[g] = 11'd5;
      s2_mult_thr[g] = 11'd3;
    end
    s1_mult_thr[2] = '0;   // the skin pulses are meant for the S2 condition
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1 run_start = 1'b1; @(posedge clk); #1 run_start = 1'b0;
    running = 1;
    wait (now == T_LED); #1 pulse_in(ext_led);
    wait (now == T_HB);  #1 pulse_in(ext_heartbeat);
    wait (now == T_BURST);
    for (int i = 0; i < 14; i++) begin
      #1 pulse_in(ext_heartbeat);
      repeat ((i % 3 == 1) ? 40 : 105) @(posedge clk);
    end
    wait (now == T_OVF + 400);
    // quiet until all queued events have left on every link
    repeat (15000) begin
      @(posedge clk);
      if (dut.u_dm.queue_level == 0 && ev_done[0].size() == int'(n_issued)) break;
    end
    repeat (300) @(posedge clk);

    // event 0: every kept sample of the ten pulsed channels, nothing elsewhere
    for (int c = 0; c < int'(N_CH); c++)
      check(ev0_words[0][c] == ((c < 10) ? 3 + int'(PRE) + int'(POST) : 0),
            $sformatf("event 0 board 0 ch %0d: %0d samples", c, ev0_words[0][c]));
    // every link reports every issued event once, in order
    for (int l = 0; l < int'(NDE); l++) begin
      check(ev_done[l].size() == int'(n_issued), $sformatf("link %0d events %0d of %0d", l, ev_done[l].size(), n_issued));
      foreach (ev_done[l][i]) if (i > 0) check(ev_done[l][i] > ev_done[l][i-1], "event order");
    end
    check(int'(n_triggers) == int'(n_issued) + int'(n_dropped), "triggers = issued + dropped");
    // mechanisms
    begin
      automatic int n_ovf = 0;
      foreach (ddc_ovf[b]) n_ovf += int'(ddc_ovf[b]);
      $display("sources: S1mult g0=%0d S2mult g2=%0d sumS1=%0d sumS2=%0d HB=%0d LED=%0d",
               n_src[0], n_src[6], n_src[8], n_src[9], n_src[10], n_src[11]);
      $display("suppressed=%0d stall_cycles=%0d dropped=%0d split=%0d frames=%0d overflow=%0d samples=%0d",
               n_suppressed, n_stall, n_dropped, n_split, n_frames, n_ovf, n_samples);
      check(n_src[0] > 0, "S1 multiplicity trigger happened");
      check(n_src[6] > 0, "S2 multiplicity trigger happened");
      check(n_src[8] > 0, "total-sum S1 trigger happened");
      check(n_src[9] > 0, "total-sum S2 trigger happened");
      check(n_src[10] > 0, "heartbeat trigger happened");
      check(n_src[11] > 0, "LED trigger happened");
      check(n_suppressed > 0, "hold-off suppression happened");
      check(n_stall > 0, "DAQ Master stall happened");
      check(n_dropped > 0, "trigger drop happened");
      check(n_split > 0, "event split over several packets happened");
      check(n_ovf > 0, "channel buffer overflow happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
