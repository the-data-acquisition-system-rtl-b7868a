// Self-checking testbench of s1_filter.
//
// Drives a constant baseline with random noise and randomly placed
// negative-going pulses, and compares every output sample with the kernel of
// the paper's Fig. 4 applied directly to the stored input history
// (weights 1, -2, 1 over windows of N, N, N samples, i.e. twice the
// filter value). It also checks the two-cycle latency, the cycle at which
// `valid` rises, zero output on a flat baseline, and that a pulse inside the
// middle window reads as its area (the Fig. 4c example: baseline 160, pulse
// samples 157, 150, 10, 30, 155).
module tb_s1_filter;
  localparam int unsigned N     = 6;
  localparam int unsigned IN_W  = 14;
  localparam int unsigned L_OUT = N;
  localparam int unsigned L_MID = N;
  localparam int unsigned L_TOT = 2*L_OUT + L_MID;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic [IN_W-1:0] din = '0;
  logic signed [IN_W+$clog2(L_TOT)+3:0] area_x2;
  logic valid;

  int checks = 0, failures = 0;

  s1_filter #(.IN_W(IN_W), .N(N)) dut (.clk, .rst_n, .en, .din, .area_x2, .valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist[$];   // samples taken, newest last

  function automatic longint kernel_x2();
    longint acc = 0;
    for (int k = 0; k < int'(L_TOT); k++) begin
      longint w;
      if (k < int'(L_OUT))               w = 1;
      else if (k < int'(L_OUT + L_MID))  w = -2;
      else                               w = 1;
      // hist[$] is the sample of the current edge; the output reflects
      // samples up to the previous edge
      acc += w * hist[hist.size() - 2 - k];
    end
    return acc;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One clock with sample s.
  task automatic step(input int s);
    din = IN_W'(s);
    @(posedge clk);
    hist.push_back(s);
    #1;
    if (hist.size() >= L_TOT + 2) begin
      check(valid == 1'b1, "valid");
      check(longint'(area_x2) == kernel_x2(), $sformatf("area_x2=%0d exp=%0d", area_x2, kernel_x2()));
    end else if (hist.size() <= L_TOT) begin
      check(valid == 1'b0, "valid low while filling");
    end
  endtask

  int peak, trough;
  int pulse[5] = '{157, 150, 10, 30, 155};

  initial begin
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1'b1;
    en = 1'b1;
    // flat baseline: output settles to exactly zero
    for (int i = 0; i < int'(2*L_TOT + 4); i++) step(160);
    check(area_x2 == 0, "flat baseline gives zero");
    // Fig. 4c pulse on baseline 160
    peak = 0; trough = 0;
    foreach (pulse[i]) step(pulse[i]);
    for (int i = 0; i < int'(2*L_TOT); i++) begin
      step(160);
      if (int'(area_x2) > peak) peak = int'(area_x2);
      if (int'(area_x2) < trough) trough = int'(area_x2);
    end
    // area = 3+10+150+130+5 = 298 ADC counts x samples
    check(peak == (-2 < -1 ? 2*298 : 298), $sformatf("peak %0d", peak));
    check(trough == -(1)*298, $sformatf("trough %0d", trough));
    // random baseline noise and pulses
    for (int i = 0; i < 20*int'(L_TOT) + 2000; i++) begin
      automatic int s = 8000 + int'($urandom_range(0, 20)) - 10;
      if ($urandom_range(0, 99) < 3) s -= int'($urandom_range(0, 7000));
      step(s);
    end
    // pause input: nothing moves while en is low
    begin
      logic signed [IN_W+$clog2(L_TOT)+3:0] held;
      held = area_x2;
      en = 1'b0;
      repeat (5) @(posedge clk);
      #1 check(area_x2 == held, "hold while en low");
      en = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
