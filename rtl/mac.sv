// mac: multiply-accumulate unit of one neuron.
//
// Each cycle with en = 1 it adds x * w to its accumulator; clr = 1 in the
// same cycle starts a new sum (acc becomes x * w, or 0 if en = 0). The
// algorithm names the MAC only; signed two's-complement operands, the
// widths and the clear input are this design's choices. The accumulator is
// wide enough for 2^(ACC_W - 2*DATA_W + 1) full-scale products.
//
// Interface and timing: acc is a register, updated one clock after the
// operands are presented. Reset is asynchronous, active low.
module mac #(
  parameter int unsigned DATA_W = dropout_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = dropout_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] w,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    base;

  always_comb begin
    prod = x * w;
    base = clr ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en) begin
      acc <= base + ACC_W'(prod);
    end else if (clr) begin
      acc <= '0;
    end
  end

endmodule
