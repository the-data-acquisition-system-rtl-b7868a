// Full-size testbench of lz_daq_top: every parameter at its default (42
// DDC-32 digitizers = 1344 channel inputs, 6 DS boards, 14 Data Extractor
// links, S2 filter N=50, 4096-word channel buffers).
//
// After the run starts, all inputs sit on a baseline with pattern noise while
// the filters fill; then ten channels of the first TPC low-gain digitizer see
// a short S1-like pulse. The S1 multiplicity of that group crosses its
// threshold, the DSM triggers, the DAQ Master broadcasts the readout window
// and all 42 digitizers send the event to their 14 Data Extractors. Checked:
// exactly one trigger with the expected source; its timestamp within a few
// cycles of the pulse; on every link one complete event with correct CRC-32;
// every sample word equal to the generated input; the ten pulsed channels
// each delivering their pulse with PRE and POST samples (3+8+8 = 19 words)
// and no other channel any sample.
module tb_lz_daq_full;
  import lz_daq_pkg::*;
  localparam int unsigned NDDC = 42, NDE = 14;
  localparam int T_PULSE = 600;

  logic clk = 1'b0, rst_n = 1'b0, run_start = 1'b0;
  logic [ADC_W-1:0] adc [NDDC][N_CH];
  ddc_cfg_t ddc_cfg [N_GROUPS];
  logic [MULT_W-1:0] s1_mult_thr [N_GROUPS];
  logic [MULT_W-1:0] s2_mult_thr [N_GROUPS];
  logic signed [31:0] sum_s1_thr = 32'sd2000000, sum_s2_thr = 32'sd2000000;
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

  lz_daq_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int sig(int b, int c, int t);
    int v = 1000 + ((b * 131 + c * 17 + t * 7) % 7) - 3;
    if (b == 0 && c < 10 && t >= T_PULSE && t < T_PULSE + 3) v -= 400;
    return v;
  endfunction

  int now = 0;
  bit running = 0;
  always @(posedge clk) now <= dut.sync ? 0 : now + 1;
  always @(negedge clk)
    for (int b = 0; b < int'(NDDC); b++)
      for (int c = 0; c < int'(N_CH); c++)
        adc[b][c] = ADC_W'(running ? sig(b, c, now) : 1000);

  trigger_t trigs[$];
  always @(posedge clk) if (rst_n && rec_valid) trigs.push_back(record.trig);

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

  int ev_done [NDE];
  int words [NDDC][N_CH];
  int hdrs = 0;

  task automatic parse(int link, byte unsigned fr[$]);
    automatic byte unsigned body[$];
    automatic int nw;
    for (int k = 8; k < fr.size() - 4; k++) body.push_back(fr[k]);
    check({fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]} == crc_serial(body),
          $sformatf("CRC on link %0d", link));
    nw = {body[48], body[49]};
    check({body[42], body[43], body[44]} == 24'd0, "event number 0");
    if (body[45][0]) ev_done[link]++;
    for (int k = 0; k < nw; k++) begin
      wave_word_t x;
      for (int j = 0; j < 8; j++) x[(7-j)*8 +: 8] = body[50 + 8*k + j];
      if (x.kind == W_SAMPLE) begin
        check(int'(x.sample) == sig(int'(x.board), int'(x.chan), int'(x.ts)), "sample value");
        words[x.board][x.chan]++;
      end else if (x.kind == W_EVT_HDR) hdrs++;
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

  int done_links;

  initial begin
    foreach (ev_done[i]) ev_done[i] = 0;
    foreach (words[b, c]) words[b][c] = 0;
    for (int g = 0; g < int'(N_GROUPS); g++) begin
      ddc_cfg[g] = '{s1_thr: 24'sd1000, s2_thr: 24'sd4000, baseline: 14'd1000, pod_thr: 14'd100,
                     sum_mask: '1};
      s1_mult_thr[g] = 11'd5;
      s2_mult_thr[g] = 11'd3;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1 run_start = 1'b1; @(posedge clk); #1 run_start = 1'b0;
    running = 1;
    do begin
      @(posedge clk);
      done_links = 0;
      foreach (ev_done[l]) if (ev_done[l] > 0) done_links++;
    end while (done_links < int'(NDE) && now < 15000);
    repeat (200) @(posedge clk);
    check(trigs.size() == 1, $sformatf("%0d triggers", trigs.size()));
    if (trigs.size() > 0) begin
      check(trigs[0].sources == 12'h001, $sformatf("trigger sources %h", trigs[0].sources));
      check(int'(trigs[0].ts) > T_PULSE && int'(trigs[0].ts) < T_PULSE + 16,
            $sformatf("trigger time %0d", trigs[0].ts));
    end
    foreach (ev_done[l]) check(ev_done[l] == 1, $sformatf("link %0d completed %0d events", l, ev_done[l]));
    check(hdrs == int'(NDDC), $sformatf("%0d digitizer headers", hdrs));
    foreach (words[b, c])
      check(words[b][c] == ((b == 0 && c < 10) ? 19 : 0),
            $sformatf("board %0d ch %0d: %0d samples", b, c, words[b][c]));
    $display("event read out at cycle %0d after the run start", now);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
