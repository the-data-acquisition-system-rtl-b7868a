// Circular waveform buffer of one digitizer channel, with baseline suppression.
//
// Only samples that belong to a pulse are kept ("pulse-only" storage): a
// sample counts as pulse when it lies more than `pod_thr` ADC counts below the
// channel's nominal `baseline` (PMT pulses are negative-going). Each such
// crossing keeps PRE samples before it and POST samples after the last
// crossing, so a pulse is stored with its leading and trailing edges. Kept
// samples are written with their timestamps into a circular memory of DEPTH
// words; when it is full the oldest word is overwritten (counted in
// `ovf_cnt`).
//
// Readout by time window: a pulse on `rd_start` with [t_start, t_end] makes
// the reader walk the memory from its oldest word. Words older than t_start
// are discarded for good (they can belong to no later event either, since
// commands arrive in time order); words inside the window are offered on
// out_valid/out_ready without being freed, so overlapping windows of later
// events can still read them; the walk ends at the first word after t_end,
// or at the newest word, and `rd_done` pulses. The reader takes two cycles
// per word (registered memory read, then decision).
//
// From the paper: per-channel circular buffers that hold baseline-suppressed
// pulse waveforms and are off-loaded when an event is selected. The
// threshold rule, PRE/POST extension, DEPTH, word format and window readout
// are this design's own choices.
module pod_buffer
  import lz_daq_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned PRE   = 8,
  parameter int unsigned POST  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // sample input, one per cycle when en is high
  input  logic             en,
  input  logic [TS_W-1:0]  ts,
  input  logic [ADC_W-1:0] din,
  input  logic [ADC_W-1:0] baseline,
  input  logic [ADC_W-1:0] pod_thr,
  // readout
  input  logic             rd_start,
  input  logic [TS_W-1:0]  t_start,
  input  logic [TS_W-1:0]  t_end,
  output logic             rd_busy,
  output logic             rd_done,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [TS_W-1:0]  out_ts,
  output logic [ADC_W-1:0] out_sample,
  // status
  output logic [15:0]      ovf_cnt,
  output logic [15:0]      stored_cnt
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned HW = $clog2(PRE + POST + 1);

  typedef struct packed {
    logic [TS_W-1:0]  ts;
    logic [ADC_W-1:0] sample;
  } entry_t;

  // ---------------- write side ----------------
  entry_t          pre_q [PRE+1];      // pre_q[0] is the current sample
  logic [PRE:0]    pre_v;
  logic [HW-1:0]   hold;
  logic            over, keep;
  entry_t          mem [DEPTH];
  logic [AW:0]     wp, tail;           // one extra wrap bit
  logic [AW:0]     count;
  logic            full, wr, overwrite, discard;

  assign over  = en && (baseline > din) && ((baseline - din) > pod_thr);
  assign keep  = en && pre_v[PRE] && (over || hold != '0);
  assign count = wp - tail;
  assign full  = (count == (AW+1)'(DEPTH));
  assign wr    = keep;
  assign overwrite = wr && full && !discard;

  always_comb begin
    pre_q[0] = '{ts: ts, sample: din};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_v <= '0;
      hold  <= '0;
      for (int i = 1; i <= int'(PRE); i++) pre_q[i] <= '0;
    end else if (en) begin
      pre_v <= {pre_v[PRE-1:0], 1'b1};
      for (int i = 1; i <= int'(PRE); i++) pre_q[i] <= pre_q[i-1];
      if (over)              hold <= HW'(PRE + POST);
      else if (hold != '0)   hold <= hold - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wp[AW-1:0]] <= pre_q[PRE];
  end

  // ---------------- read side ----------------
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} rstate_e;
  rstate_e        rstate;
  logic [AW:0]    rp;
  logic [TS_W-1:0] win_start, win_end;
  entry_t         rdata;
  logic           lagging;

  // the reader fell behind the writer's overwrites
  assign lagging = ((wp - rp) > (AW+1)'(DEPTH));
  assign discard = (rstate == R_DATA) && ts_before(rdata.ts, win_start) && (rp == tail);

  always_ff @(posedge clk) begin
    rdata <= mem[rp[AW-1:0]];
  end

  assign out_valid  = (rstate == R_DATA) && !ts_before(rdata.ts, win_start)
                                         && !ts_before(win_end, rdata.ts);
  assign out_ts     = rdata.ts;
  assign out_sample = rdata.sample;
  assign rd_busy    = (rstate != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate    <= R_IDLE;
      rp        <= '0;
      win_start <= '0;
      win_end   <= '0;
      rd_done   <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      unique case (rstate)
        R_IDLE: if (rd_start) begin
          win_start <= t_start;
          win_end   <= t_end;
          rp        <= tail;
          rstate    <= R_ADDR;
        end
        R_ADDR: begin
          if (lagging) rp <= tail;                 // re-read from the oldest word
          else if (rp == wp) begin                 // nothing newer stored
            rstate  <= R_IDLE;
            rd_done <= 1'b1;
          end else rstate <= R_DATA;               // rdata = mem[rp] next cycle
        end
        R_DATA: begin
          if (ts_before(rdata.ts, win_start)) begin
            rp     <= rp + 1'b1;
            rstate <= R_ADDR;
          end else if (!ts_before(win_end, rdata.ts)) begin
            if (out_ready) begin
              rp     <= rp + 1'b1;
              rstate <= R_ADDR;
            end
          end else begin
            rstate  <= R_IDLE;
            rd_done <= 1'b1;
          end
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // pointers and counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      tail       <= '0;
      ovf_cnt    <= '0;
      stored_cnt <= '0;
    end else begin
      if (wr) begin
        wp <= wp + 1'b1;
        if (stored_cnt != '1) stored_cnt <= stored_cnt + 1'b1;
      end
      if (discard || overwrite) tail <= tail + 1'b1;
      if (overwrite && ovf_cnt != '1) ovf_cnt <= ovf_cnt + 1'b1;
    end
  end

  // The buffer never holds more than DEPTH words.
  always_ff @(posedge clk) begin
    if (rst_n) assert (count <= (AW+1)'(DEPTH)) else $error("pod_buffer: occupancy above DEPTH");
  end
endmodule
