// Three-window integrating filter, the common core of the S1 and S2 filters.
//
// The kernel is three adjacent boxcar windows over the most recent samples:
// an "outer" window of L_OUT samples, a middle window of L_MID samples and a
// second outer window of L_OUT samples, weighted W_OUT, W_MID, W_OUT. When
// 2*L_OUT*W_OUT + L_MID*W_MID = 0 the kernel has zero sum, so a constant
// baseline gives zero output (real-time baseline subtraction) and a pulse that
// sits inside the middle window gives W_MID times its area.
//
// How it works: the last L_TOT = 2*L_OUT+L_MID samples live in a circular
// delay line. Each window keeps a running sum, updated every cycle by the
// sample entering it and the one leaving it, so the cost does not depend on
// the window lengths. Until the delay line has been filled once after reset,
// a sample "leaving" a window is taken as zero, so no memory clear is needed;
// `valid` rises when the kernel is full.
//
// Timing: one sample per cycle when `en` is high. The window sums are
// registered, the weighted sum a cycle later: a sample taken at clock edge k
// is first part of `y` after edge k+1 (two enabled cycles of latency).
// The window shapes come from the paper; the circular-buffer/running-sum
// structure and integer weights are this design's choice.
module three_window_filter #(
  parameter int unsigned IN_W  = 14,
  parameter int unsigned L_OUT = 6,
  parameter int unsigned L_MID = 6,
  parameter int          W_OUT = 1,
  parameter int          W_MID = -2,
  parameter int unsigned OUT_W = IN_W + $clog2(2*L_OUT+L_MID) + 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [IN_W-1:0]         din,
  output logic signed [OUT_W-1:0] y,
  output logic                    valid
);
  localparam int unsigned L_TOT = 2*L_OUT + L_MID;
  localparam int unsigned AW    = (L_TOT > 1) ? $clog2(L_TOT) : 1;
  localparam int unsigned CW    = $clog2(L_TOT + 1);
  localparam int unsigned SW    = IN_W + $clog2(L_TOT + 1) + 1;  // signed window sum

  logic [IN_W-1:0] dly [L_TOT];
  logic [AW-1:0]   wp;
  logic [CW-1:0]   fill;          // samples written since reset, saturating at L_TOT
  logic signed [SW-1:0] sum_a, sum_b, sum_c;   // newest, middle, oldest window

  // Address of the sample taken k cycles before the current one.
  function automatic logic [AW-1:0] back(input logic [AW-1:0] p, input int unsigned k);
    int unsigned a;
    a = (int'(p) + L_TOT - k) % L_TOT;
    return AW'(a);
  endfunction

  logic [IN_W-1:0] x_ab, x_bc, x_out;   // samples crossing window boundaries
  always_comb begin
    x_ab  = (fill >= CW'(L_OUT))         ? dly[back(wp, L_OUT)]         : '0;
    x_bc  = (fill >= CW'(L_OUT + L_MID)) ? dly[back(wp, L_OUT + L_MID)] : '0;
    x_out = (fill >= CW'(L_TOT))         ? dly[wp]                      : '0;
  end

  always_ff @(posedge clk) begin
    if (en) dly[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      fill  <= '0;
      sum_a <= '0;
      sum_b <= '0;
      sum_c <= '0;
      y     <= '0;
      valid <= 1'b0;
    end else if (en) begin
      wp    <= (wp == AW'(L_TOT - 1)) ? '0 : wp + 1'b1;
      if (fill != CW'(L_TOT)) fill <= fill + 1'b1;
      sum_a <= sum_a + SW'(din)  - SW'(x_ab);
      sum_b <= sum_b + SW'(x_ab) - SW'(x_bc);
      sum_c <= sum_c + SW'(x_bc) - SW'(x_out);
      y     <= OUT_W'(W_OUT * (OUT_W'(sum_a) + OUT_W'(sum_c)) + W_MID * OUT_W'(sum_b));
      valid <= (fill == CW'(L_TOT));
    end
  end
endmodule
