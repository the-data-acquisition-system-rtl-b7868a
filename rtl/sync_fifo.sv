// Small synchronous FIFO with valid/ready on both sides.
//
// DEPTH words of WIDTH bits in a circular register array; `in_ready` is low
// when full, `out_valid` high when not empty. Data written in one cycle can be
// read the next. Used for readout commands and frame buffering.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH+1);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic push, pop;

  assign in_ready  = (level != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + LW'(push) - LW'(pop);
    end
  end
endmodule
