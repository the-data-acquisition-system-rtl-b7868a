// Self-checking testbench of dsm (two DS boards, in groups 0 and 2; S2 filter
// N=10; hold-off 50 cycles). Each trigger source is provoked in turn and the
// testbench checks the trigger's source bits, timestamp and event number, the
// recorded multiplicities, that disabled sources and groups left out of the
// total sum do not trigger, and that requests inside the hold-off window are
// suppressed and counted.
module tb_dsm;
  import lz_daq_pkg::*;
  localparam int unsigned N_DS = 2, S2_N = 10, HOLDOFF = 50;
  localparam int unsigned DS_GROUP [N_DS] = '{0, 2};

  logic clk = 1'b0, rst_n = 1'b0, sync = 1'b0;
  ds_tp_t ds_in [N_DS];
  logic ext_heartbeat = 1'b0, ext_led = 1'b0;
  logic [MULT_W-1:0] s1_mult_thr [N_GROUPS];
  logic [MULT_W-1:0] s2_mult_thr [N_GROUPS];
  logic signed [31:0] sum_s1_thr = 32'sd5000, sum_s2_thr = 32'sd100000;
  logic [N_GROUPS-1:0] sum_groups = 4'b0001;
  logic [N_TRIG_SRC-1:0] src_enable = 12'h7FF;   // LED off at first
  logic trig_valid;
  trigger_t trig;
  ds_record_t record;
  logic [31:0] n_triggers, n_suppressed;
  int checks = 0, failures = 0;
  int now = 0;

  dsm #(.N_DS(N_DS), .DS_GROUP(DS_GROUP), .S2_N(S2_N), .HOLDOFF(HOLDOFF)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) now <= sync ? 0 : now + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  trigger_t trigs[$];
  ds_record_t recs[$];
  always @(posedge clk) if (rst_n && trig_valid) begin trigs.push_back(trig); recs.push_back(record); end

  task automatic idle(input int n);
    repeat (n) begin @(posedge clk); #1; end
  endtask

  // `now` during the cycle the stimulus is applied
  int t_apply;

  initial begin
    for (int g = 0; g < int'(N_GROUPS); g++) begin s1_mult_thr[g] = 11'd4; s2_mult_thr[g] = 11'd2; end
    foreach (ds_in[i]) begin ds_in[i] = '0; ds_in[i].dsum = SUM_W'(5000); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    sync = 1'b1; idle(1); sync = 1'b0;
    idle(200);
    check(trigs.size() == 0, "quiet baseline gives no trigger");

    // 1: group 0 S1 multiplicity
    t_apply = now;
    ds_in[0].s1_mult = 11'd5; idle(1); ds_in[0].s1_mult = '0;
    idle(5);
    check(trigs.size() == 1 && trigs[0].sources == 12'h001, "S1 multiplicity trigger");
    check(int'(trigs[0].ts) == t_apply + 1 && trigs[0].event_id == 0, "trigger time and number");
    check(recs[0].s1_mult[0 +: MULT_W] == 11'd5, "record multiplicity");
    // 2: within hold-off -> suppressed
    ds_in[0].s1_mult = 11'd5; idle(1); ds_in[0].s1_mult = '0;
    idle(5);
    check(trigs.size() == 1 && n_suppressed == 1, "hold-off suppresses");
    idle(60);
    // 3: group 2 S2 multiplicity (DS 1)
    ds_in[1].s2_mult = 11'd3; idle(1); ds_in[1].s2_mult = '0;
    idle(5);
    check(trigs.size() == 2 && trigs[1].sources == 12'h040 && trigs[1].event_id == 1, "S2 multiplicity of group 2");
    idle(60);
    // 4: LED disabled, then enabled; heartbeat
    ext_led = 1'b1; idle(1); ext_led = 1'b0; idle(5);
    check(trigs.size() == 2, "disabled source ignored");
    src_enable[11] = 1'b1;
    ext_led = 1'b1; idle(1); ext_led = 1'b0; idle(60);
    ext_heartbeat = 1'b1; idle(1); ext_heartbeat = 1'b0; idle(60);
    check(trigs.size() == 4 && trigs[2].sources == 12'h800 && trigs[3].sources == 12'h400, "external triggers");
    // 5: big pulse on group 2 sum, which is not in the total sum
    for (int i = 0; i < 30; i++) begin ds_in[1].dsum = SUM_W'(1000); idle(1); end
    ds_in[1].dsum = SUM_W'(5000); idle(100);
    check(trigs.size() == 4, "sum of a group outside sum_groups ignored");
    // 6: short pulse on the total sum: S1 area 3 x 1000 -> 2x area = 6000 > 5000
    for (int i = 0; i < 3; i++) begin ds_in[0].dsum = SUM_W'(4000); idle(1); end
    ds_in[0].dsum = SUM_W'(5000); idle(60);
    check(trigs.size() == 5 && trigs[4].sources == 12'h100, "total-sum S1 area");
    check(recs[4].sum_s1_x2 > 5000 && recs[4].sum_s1_x2 <= 6000, "record holds S1 area");
    // 7: long pulse: 30 x 500 = 15000 area; S2 filter (2x value) reads 15000
    sum_s2_thr = 32'sd10000;
    for (int i = 0; i < 30; i++) begin ds_in[0].dsum = SUM_W'(4500); idle(1); end
    ds_in[0].dsum = SUM_W'(5000); idle(100);
    check(trigs.size() == 6 && trigs[5].sources == 12'h200, "total-sum S2 area");
    check(n_triggers == 6, "trigger count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
