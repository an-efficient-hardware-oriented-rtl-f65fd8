// dropout_gate: the mask-enabled output stage of a neuron.
//
// The block diagram of the algorithm draws this stage as a D-latch whose
// enable is the neuron's dropout-mask bit. A latch that is not enabled
// keeps its old value, while dropout requires a dropped neuron to output
// zero (the mask multiplies the activation by 0 or 1). This design follows
// the second: it is an edge-triggered register that, on load, takes d when
// keep = 1 and 0 when keep = 0. Using a flip-flop instead of a level latch
// is this design's choice.
//
// Interface and timing: q changes one clock after load; between loads it
// holds. Reset is asynchronous, active low, to zero.
module dropout_gate #(
  parameter int unsigned W = dropout_pkg::DEF_ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic                keep,   // dropout-mask bit: 1 keeps, 0 drops
  input  logic signed [W-1:0] d,
  output logic signed [W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (load) begin
      q <= keep ? d : '0;
    end
  end

endmodule
