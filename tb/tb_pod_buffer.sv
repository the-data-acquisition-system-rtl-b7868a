// Self-checking testbench of pod_buffer.
//
// A small buffer (DEPTH=64, PRE=3, POST=4) is fed a baseline of 1000 counts
// with randomly placed negative pulses, timestamp = cycle number. The
// testbench computes on its own which samples must be kept (every sample
// within PRE before to POST after a threshold crossing), then reads back a
// series of increasing time windows and compares every word, in order. A
// second phase writes more pulse samples than the memory holds and checks
// that exactly the newest DEPTH remain and that the overwrites are counted.
// Readout speed is checked too: two cycles per word when out_ready is high.
module tb_pod_buffer;
  import lz_daq_pkg::*;
  localparam int unsigned DEPTH = 64, PRE = 3, POST = 4;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [TS_W-1:0] ts = '0;
  logic [ADC_W-1:0] din = '0, baseline = 14'd1000, pod_thr = 14'd50;
  logic rd_start = 1'b0, rd_busy, rd_done, out_valid, out_ready = 1'b1;
  logic [TS_W-1:0] t_start = '0, t_end = '0, out_ts;
  logic [ADC_W-1:0] out_sample;
  logic [15:0] ovf_cnt, stored_cnt;

  int checks = 0, failures = 0;

  pod_buffer #(.DEPTH(DEPTH), .PRE(PRE), .POST(POST)) dut (.*);

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
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int samples[$];          // sample stream, index = timestamp
  int exp_ts[$], exp_s[$]; // expected buffer contents, oldest first

  // Write n samples starting at the current timestamp; pulses with prob pct%.
  task automatic write_stream(input int n, input int pct);
    int base_ts = samples.size();
    for (int i = 0; i < n; i++) begin
      automatic int s = 1000 + int'($urandom_range(0, 10)) - 5;
      if (int'($urandom_range(0, 99)) < pct) s = 1000 - 51 - int'($urandom_range(0, 500));
      samples.push_back(s);
    end
    for (int i = 0; i < n; i++) begin
      din = ADC_W'(samples[base_ts + i]);
      ts  = TS_W'(base_ts + i);
      en  = 1'b1;
      @(posedge clk); #1;
    end
    en = 1'b0;
    // flush: keep timestamps moving on a quiet baseline so delayed samples land
    for (int i = 0; i < int'(PRE + POST + 2); i++) begin
      samples.push_back(1000);
      din = 14'd1000; ts = TS_W'(samples.size() - 1); en = 1'b1;
      @(posedge clk); #1;
    end
    en = 1'b0;
  endtask

  // Expected kept samples in [from, to) of the stream.
  task automatic model_keep(input int from, input int to);
    for (int t = from; t < to; t++) begin
      bit k = 0;
      for (int c = t - int'(POST); c <= t + int'(PRE); c++)
        if (c >= 0 && c < samples.size() && (1000 - samples[c]) > 50) k = 1;
      if (k) begin exp_ts.push_back(t); exp_s.push_back(samples[t]); end
    end
  endtask

  task automatic read_window(input int a, input int b);
    int got = 0, want = 0, cycles = 0;
    int q_ts[$], q_s[$];
    // expectation: discard older than a, return [a, b]
    while (exp_ts.size() > 0 && exp_ts[0] < a) begin void'(exp_ts.pop_front()); void'(exp_s.pop_front()); end
    foreach (exp_ts[i]) if (exp_ts[i] <= b) begin q_ts.push_back(exp_ts[i]); q_s.push_back(exp_s[i]); end
    want = q_ts.size();
    t_start = TS_W'(a); t_end = TS_W'(b); rd_start = 1'b1;
    @(posedge clk); #1; rd_start = 1'b0;
    while (!rd_done) begin
      if (out_valid && out_ready) begin
        check(got < want && int'(out_ts) == q_ts[got] && int'(out_sample) == q_s[got],
              $sformatf("word %0d of window [%0d,%0d]: ts=%0d s=%0d", got, a, b, out_ts, out_sample));
        got++;
      end
      @(posedge clk); #1;
      cycles++;
    end
    check(got == want, $sformatf("window [%0d,%0d] got %0d words, want %0d", a, b, got, want));
    // two cycles per returned word, plus skipped words and the closing look
    check(cycles <= 2*want + 2*(want + 40) + 4, $sformatf("readout took %0d cycles", cycles));
  endtask

  int total;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // phase 1: a sparse pulse stream, no overflow
    write_stream(300, 2);
    model_keep(0, samples.size());
    check(int'(stored_cnt) == exp_ts.size(), $sformatf("stored %0d want %0d", stored_cnt, exp_ts.size()));
    check(exp_ts.size() > 10 && exp_ts.size() < int'(DEPTH), "phase 1 sample count in range");
    read_window(20, 80);
    read_window(60, 140);     // overlaps the previous window
    read_window(150, 151);
    read_window(200, 400);
    check(ovf_cnt == 0, "no overflow in phase 1");
    // phase 2: dense pulses overflow the buffer
    begin
      automatic int from = samples.size();
      write_stream(400, 30);
      model_keep(from - int'(PRE), samples.size());   // the flush tail can join a new pulse
    end
    total = exp_ts.size();
    while (exp_ts.size() > int'(DEPTH)) begin void'(exp_ts.pop_front()); void'(exp_s.pop_front()); end
    check(ovf_cnt > 0, "overflow counted");
    read_window(0, samples.size() + 10);
    check(int'(ovf_cnt) + int'(DEPTH) == total, $sformatf("ovf_cnt %0d total %0d", ovf_cnt, total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
