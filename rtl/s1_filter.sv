// S1 filter: the short pulse-area filter of every digitizer channel.
//
// Kernel (paper, Fig. 4a): three windows of N samples weighted +0.5, -1, +0.5.
// The kernel sums to zero, so the channel baseline is removed; a negative-going
// PMT pulse that fits inside the middle window gives an output equal to its
// area (in ADC counts x samples), with negative side lobes of half that size
// while the pulse passes the outer windows (Fig. 4c).
// To stay in integers the module outputs twice the filter value, `area_x2`,
// from weights +1, -2, +1.
// N is matched to an S1 pulse of about 60 ns full width at tenth maximum,
// i.e. 6 samples at 100 MHz (the paper gives the 60 ns, the sample count
// follows from it).
// Interface and timing: one sample per cycle while `en` is high; latency two
// cycles (see three_window_filter); `valid` once 3N samples have been taken.
module s1_filter #(
  parameter int unsigned IN_W = 14,
  parameter int unsigned N    = 6,
  parameter int unsigned OUT_W = IN_W + $clog2(3*N) + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [IN_W-1:0]         din,
  output logic signed [OUT_W-1:0] area_x2,
  output logic                    valid
);
  three_window_filter #(
    .IN_W (IN_W), .L_OUT(N), .L_MID(N), .W_OUT(1), .W_MID(-2), .OUT_W(OUT_W)
  ) u_core (
    .clk, .rst_n, .en, .din, .y(area_x2), .valid
  );
endmodule
