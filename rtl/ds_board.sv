// Data Sparsification (DS) board: combines the trigger primitives of the
// DDC-32 digitizers attached to it.
//
// Every cycle it adds up the S1 and S2 multiplicities and the digital sums of
// its N_IN digitizers and registers the result for the Data Sparsification
// Master. Its hit vectors are kept as one concatenated vector (`hits_s1`,
// `hits_s2`, digitizer 0 in the low bits) for hit-pattern use and for
// recording with an event.
// Interface: arrays of ddc_tp_t in, one ds_tp_t out; latency one cycle.
// From the paper: DS boards receive hit vectors, multiplicities and sums from
// groups of DDC-32s (8 per DS in the TPC groups) and feed the DSM. The split
// of work between DS and DSM (DS sums, DSM decides) is this design's choice.
module ds_board
  import lz_daq_pkg::*;
#(
  parameter int unsigned N_IN = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  ddc_tp_t                tp_in [N_IN],
  output ds_tp_t                 tp_out,
  output logic [N_IN*N_CH-1:0]   hits_s1,
  output logic [N_IN*N_CH-1:0]   hits_s2
);
  ds_tp_t acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < int'(N_IN); i++) begin
      acc.s1_mult += MULT_W'(tp_in[i].s1_mult);
      acc.s2_mult += MULT_W'(tp_in[i].s2_mult);
      acc.dsum    += tp_in[i].dsum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tp_out  <= '0;
      hits_s1 <= '0;
      hits_s2 <= '0;
    end else begin
      tp_out <= acc;
      for (int i = 0; i < int'(N_IN); i++) begin
        hits_s1[i*N_CH +: N_CH] <= tp_in[i].s1_hits;
        hits_s2[i*N_CH +: N_CH] <= tp_in[i].s2_hits;
      end
    end
  end
endmodule
