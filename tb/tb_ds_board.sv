// Self-checking testbench of ds_board: random trigger primitives from three
// digitizers; after one cycle the outputs must equal the testbench's own sums
// of the multiplicities and digital sums and the concatenated hit vectors.
module tb_ds_board;
  import lz_daq_pkg::*;
  localparam int unsigned N_IN = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  ddc_tp_t tp_in [N_IN];
  ds_tp_t tp_out;
  logic [N_IN*N_CH-1:0] hits_s1, hits_s2;
  int checks = 0, failures = 0;

  ds_board #(.N_IN(N_IN)) dut (.*);
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

  initial begin
    foreach (tp_in[i]) tp_in[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (500) begin
      automatic int s1 = 0, s2 = 0;
      automatic longint ds = 0;
      logic [N_IN*N_CH-1:0] h1, h2;
      for (int i = 0; i < int'(N_IN); i++) begin
        tp_in[i].s1_hits = $urandom; tp_in[i].s2_hits = $urandom;
        tp_in[i].s1_mult = 6'($urandom_range(0, 32));
        tp_in[i].s2_mult = 6'($urandom_range(0, 32));
        tp_in[i].dsum    = SUM_W'($urandom_range(0, 32*16383));
        s1 += int'(tp_in[i].s1_mult); s2 += int'(tp_in[i].s2_mult);
        ds += longint'(tp_in[i].dsum);
        h1[i*N_CH +: N_CH] = tp_in[i].s1_hits; h2[i*N_CH +: N_CH] = tp_in[i].s2_hits;
      end
      @(posedge clk); #1;
      check(int'(tp_out.s1_mult) == s1 && int'(tp_out.s2_mult) == s2, "multiplicity sums");
      check(longint'(tp_out.dsum) == ds, "digital sum");
      check(hits_s1 == h1 && hits_s2 == h2, "hit vectors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
