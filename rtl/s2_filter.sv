// S2 filter: the long pulse-area filter of every digitizer channel.
//
// Kernel (paper, Fig. 4b): an N-sample window weighted +1, a 4N-sample window
// weighted -0.5 and another N-sample window weighted +1. The kernel sums to
// zero (baseline removed); a negative-going pulse inside the 4N middle window
// gives half its area. The module outputs twice the filter value, `area_x2`,
// from weights +2, -1, +2, so a pulse inside the middle window reads as its
// area.
// The paper matches the 4N window to an S2 pulse "a few microseconds" wide
// without giving N; N = 50 (4N = 2 us at 100 MHz) is this design's choice.
// Interface and timing: one sample per cycle while `en` is high; latency two
// cycles; `valid` once 6N samples have been taken.
module s2_filter #(
  parameter int unsigned IN_W = 14,
  parameter int unsigned N    = 50,
  parameter int unsigned OUT_W = IN_W + $clog2(6*N) + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [IN_W-1:0]         din,
  output logic signed [OUT_W-1:0] area_x2,
  output logic                    valid
);
  three_window_filter #(
    .IN_W (IN_W), .L_OUT(N), .L_MID(4*N), .W_OUT(2), .W_MID(-1), .OUT_W(OUT_W)
  ) u_core (
    .clk, .rst_n, .en, .din, .y(area_x2), .valid
  );
endmodule
