// DAQ Master (DM): run synchronisation and readout command generation.
//
// `run_start` makes the DM pulse `sync` for one cycle; every board clears its
// timestamp counter on it, so all boards count the same 10 ns ticks. Each
// trigger from the DSM (timestamp T) becomes a readout command for the time
// window [T - PRE_WIN, T + POST_WIN], queued in a FIFO of TRIG_DEPTH entries.
// A command is issued only once the window has closed and SETTLE further
// cycles have passed, so the digitizers' buffers hold all of its samples, and
// only when every digitizer can take it (`cmd_ready`, the AND of their
// command FIFOs): digitizers that fall behind stall the DM. A trigger that
// arrives while the queue is full is dropped and counted in `n_dropped`.
// Interface: trigger pulse in, one broadcast command valid/ready out.
// From the paper: the DM distributes clock and synchronisation to the
// digitizers and off-loads selected events. Window lengths, queue depth and
// the drop rule are this design's choices.
module daq_master
  import lz_daq_pkg::*;
#(
  parameter int unsigned PRE_WIN    = 100,
  parameter int unsigned POST_WIN   = 300,
  parameter int unsigned SETTLE     = 16,
  parameter int unsigned TRIG_DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run_start,
  output logic         sync,
  input  logic         trig_valid,
  input  trigger_t     trig,
  output logic         cmd_valid,
  input  logic         cmd_ready,
  output readout_cmd_t cmd,
  output logic [31:0]  n_issued,
  output logic [31:0]  n_dropped,
  output logic [$clog2(TRIG_DEPTH+1)-1:0] queue_level
);
  logic [TS_W-1:0] ts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts   <= '0;
      sync <= 1'b0;
    end else begin
      sync <= run_start;
      ts   <= sync ? '0 : ts + 1'b1;
    end
  end

  readout_cmd_t new_cmd, head;
  logic q_in_ready, q_valid, ripe;
  assign new_cmd = '{event_id: trig.event_id,
                     t_start:  trig.ts - TS_W'(PRE_WIN),
                     t_end:    trig.ts + TS_W'(POST_WIN)};

  sync_fifo #(.WIDTH($bits(readout_cmd_t)), .DEPTH(TRIG_DEPTH)) u_q (
    .clk, .rst_n, .in_valid(trig_valid), .in_ready(q_in_ready), .in_data(new_cmd),
    .out_valid(q_valid), .out_ready(cmd_valid && cmd_ready), .out_data(head),
    .level(queue_level));

  // window closed SETTLE cycles ago
  assign ripe      = ts_before(head.t_end + TS_W'(SETTLE), ts);
  assign cmd_valid = q_valid && ripe;
  assign cmd       = head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_issued  <= '0;
      n_dropped <= '0;
    end else begin
      if (cmd_valid && cmd_ready)       n_issued  <= n_issued + 1'b1;
      if (trig_valid && !q_in_ready)    n_dropped <= n_dropped + 1'b1;
    end
  end
endmodule
