// Self-checking testbench of data_extractor (two inputs, packets of at most
// 8 words). Each input gets events made of a header word, a random number of
// sample words and an end word, offered with random gaps. Every frame on the
// byte interface is parsed: preamble and SFD, MAC addresses and type, IPv4
// header (lengths, protocol, checksum verified by summing the header), UDP
// length, application header (event number, last-packet flag, sequence number
// +1 per frame, word count), the payload words against the expected order
// (input 0's words of the event, then input 1's), the CRC-32 recomputed
// bit-serially here, and the inter-frame gap. Sending speed is checked: one
// byte per cycle inside a frame.
module tb_data_extractor;
  import lz_daq_pkg::*;
  localparam int unsigned N_IN = 2, MAXW = 8, IFG = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid [N_IN];
  logic in_ready [N_IN];
  wave_word_t in_word [N_IN];
  logic tx_en;
  logic [7:0] txd;
  logic [31:0] n_packets, n_events;
  int checks = 0, failures = 0;

  logic [47:0] src_mac = 48'h02_00_00_00_00_01, dst_mac = 48'h02_00_00_00_01_01;
  logic [31:0] src_ip = 32'hC0A8_0A01, dst_ip = 32'hC0A8_0A02;

  data_extractor #(.N_IN(N_IN), .MAX_WORDS(MAXW), .IFG(IFG)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- stimulus ----------------
  localparam int N_EVT = 6;
  wave_word_t src_q [N_IN][$];
  wave_word_t exp_q [$];          // expected payload order
  int exp_evt_words [N_EVT];

  function automatic wave_word_t mk(word_kind_e k, int board, int ch, int ts, int s);
    wave_word_t x;
    x = '0; x.kind = k; x.board = BOARD_W'(board); x.chan = 5'(ch);
    x.ts = TS_W'(ts); x.sample = ADC_W'(s);
    return x;
  endfunction

  initial begin
    for (int e = 0; e < N_EVT; e++) begin
      exp_evt_words[e] = 0;
      for (int i = 0; i < int'(N_IN); i++) begin
        automatic int ns = (e == 2) ? 0 : int'($urandom_range(0, 20));
        src_q[i].push_back(mk(W_EVT_HDR, i, 0, 500 + e, 0));
        for (int k = 0; k < ns; k++)
          src_q[i].push_back(mk(W_SAMPLE, i, $urandom_range(0, 31), 1000 * e + k, $urandom_range(0, 16383)));
        src_q[i].push_back(mk(W_EVT_END, i, 0, 500 + e, 0));
      end
      for (int i = 0; i < int'(N_IN); i++) begin
        automatic int lo = 0;
        // words of event e on input i: from the e-th header to the e-th end
        automatic int cnt = 0;
        foreach (src_q[i][k]) begin
          if (src_q[i][k].kind == W_EVT_HDR) begin
            if (cnt == e) lo = k;
            cnt++;
          end
        end
        for (int k = lo; k < src_q[i].size(); k++) begin
          exp_q.push_back(src_q[i][k]);
          exp_evt_words[e]++;
          if (src_q[i][k].kind == W_EVT_END) break;
        end
      end
    end
  end

  // drivers with random gaps
  for (genvar i = 0; i < N_IN; i++) begin : g_drv
    int pos = 0;
    always @(posedge clk) begin
      if (rst_n && in_valid[i] && in_ready[i]) pos <= pos + 1;
    end
    always @(negedge clk) begin
      in_valid[i] = 1'b0;
      in_word[i]  = '0;
      if (rst_n && pos < src_q[i].size() && $urandom_range(0, 3) != 0) begin
        in_valid[i] = 1'b1;
        in_word[i]  = src_q[i][pos];
      end
    end
  end

  // ---------------- frame checker ----------------
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

  byte unsigned fr[$];
  int frames = 0, exp_seq = 0, exp_pos = 0, gap = 100, cur_evt = 0, last_seen = 0;
  bit in_frame = 0;

  task automatic parse();
    byte unsigned body[$];
    automatic int nw, len, s;
    int ev, flags, sq;
    check(fr.size() >= 8 + 50 + 4, "frame length");
    for (int k = 0; k < 7; k++) check(fr[k] == 8'h55, "preamble");
    check(fr[7] == 8'hD5, "SFD");
    for (int k = 8; k < fr.size() - 4; k++) body.push_back(fr[k]);
    check({fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]} == crc_serial(body), "CRC-32");
    check({body[0], body[1], body[2], body[3], body[4], body[5]} == 48'h02_00_00_00_01_01, "dst MAC");
    check({body[12], body[13]} == 16'h0800, "ethertype");
    // IPv4 header checksum: sum of the ten words incl. checksum = FFFF
    s = 0;
    for (int k = 0; k < 10; k++) s += {body[14 + 2*k], body[15 + 2*k]};
    while (s > 32'hFFFF) s = (s & 32'hFFFF) + (s >> 16);
    check(s == 32'hFFFF, "IP checksum");
    check(body[14] == 8'h45 && body[23] == 8'd17, "IPv4/UDP");
    nw  = {body[48], body[49]};
    len = {body[16], body[17]};
    check(len == 20 + 8 + 8 + 8*nw, "IP total length");
    check({body[38], body[39]} == 16'(8 + 8 + 8*nw), "UDP length");
    check(body.size() == 50 + 8*nw, "payload size matches word count");
    check(nw >= 1 && nw <= int'(MAXW), "word count in range");
    ev = {body[42], body[43], body[44]}; flags = body[45]; sq = {body[46], body[47]};
    check(sq == exp_seq, "sequence number"); exp_seq++;
    check(ev == 500 + cur_evt, $sformatf("event number %0d want %0d", ev, 500 + cur_evt));
    for (int k = 0; k < nw; k++) begin
      logic [63:0] x;
      for (int j = 0; j < 8; j++) x[(7-j)*8 +: 8] = body[50 + 8*k + j];
      check(exp_pos < exp_q.size() && x == exp_q[exp_pos], $sformatf("payload word %0d", exp_pos));
      exp_pos++;
    end
    if (flags[0]) begin
      // the whole event has been delivered
      automatic int tot = 0;
      for (int e = 0; e <= cur_evt; e++) tot += exp_evt_words[e];
      check(exp_pos == tot, "last flag at end of event");
      cur_evt++;
    end
    frames++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (tx_en) begin
      if (!in_frame) begin
        check(gap >= int'(IFG), $sformatf("inter-frame gap %0d", gap));
        fr.delete();
      end
      in_frame = 1; fr.push_back(txd); gap = 0;
    end else begin
      if (in_frame) parse();
      in_frame = 0; gap++;
    end
  end

  initial begin
    foreach (in_valid[i]) begin in_valid[i] = 1'b0; in_word[i] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (cur_evt == N_EVT);
    repeat (50) @(posedge clk);
    check(exp_pos == exp_q.size(), "all words delivered");
    check(int'(n_packets) == frames && int'(n_events) == N_EVT, "counters");
    check(frames > N_EVT, "events were split into several packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
