// Self-checking testbench of daq_master (PRE_WIN=10, POST_WIN=30, SETTLE=4,
// queue of 4). Checks the sync pulse, that each trigger becomes a command
// with window [T-10, T+30] issued exactly when T+30+4 has passed, that
// commands wait while cmd_ready is low, and that triggers beyond the queue
// depth are dropped and counted.
module tb_daq_master;
  import lz_daq_pkg::*;
  localparam int unsigned PRE_WIN = 10, POST_WIN = 30, SETTLE = 4, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0, run_start = 1'b0, sync;
  logic trig_valid = 1'b0, cmd_valid, cmd_ready = 1'b1;
  trigger_t trig;
  readout_cmd_t cmd;
  logic [31:0] n_issued, n_dropped;
  logic [2:0] queue_level;
  int checks = 0, failures = 0;
  int now = 0;     // testbench copy of the timestamp

  daq_master #(.PRE_WIN(PRE_WIN), .POST_WIN(POST_WIN), .SETTLE(SETTLE), .TRIG_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  readout_cmd_t seen[$];
  int seen_at[$];
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    seen.push_back(cmd); seen_at.push_back(now);
  end
  always @(posedge clk) now <= sync ? 0 : now + 1;

  task automatic fire(input int id);
    trig = '{event_id: EVT_W'(id), ts: TS_W'(now), sources: 12'h001};
    trig_valid = 1'b1; @(posedge clk); #1 trig_valid = 1'b0;
  endtask

  initial begin
    trig = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run_start = 1'b1; @(posedge clk); #1 run_start = 1'b0;
    check(sync == 1'b1, "sync pulse");
    @(posedge clk); #1;
    check(sync == 1'b0, "sync is one cycle");
    repeat (50) @(posedge clk); #1;
    // one trigger at a known time; `now` has the DM's timestamp value
    begin
      automatic int t0 = now;
      fire(1);
      repeat (60) @(posedge clk); #1;
      check(seen.size() == 1, "one command");
      check(seen[0].event_id == 1 && int'(seen[0].t_start) == t0 - 10 && int'(seen[0].t_end) == t0 + 30,
            "window");
      check(seen_at[0] == t0 + 30 + 4 + 1, $sformatf("issued at %0d, trigger at %0d", seen_at[0], t0));
    end
    // stall: commands wait for cmd_ready
    cmd_ready = 1'b0;
    fire(2); fire(3);
    repeat (80) @(posedge clk); #1;
    check(seen.size() == 1 && cmd_valid, "stalled while not ready");
    cmd_ready = 1'b1;
    repeat (3) @(posedge clk); #1;
    check(seen.size() == 3 && seen[1].event_id == 2 && seen[2].event_id == 3, "released in order");
    // overflow: six triggers into a queue of four while stalled
    cmd_ready = 1'b0;
    for (int i = 0; i < 6; i++) fire(10 + i);
    check(n_dropped == 2, $sformatf("dropped %0d", n_dropped));
    check(queue_level == 3'(DEPTH), "queue full");
    cmd_ready = 1'b1;
    repeat (80) @(posedge clk); #1;
    check(n_issued == 7 && seen.size() == 7, "all queued commands issued");
    check(seen[6].event_id == 13, "last kept trigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
