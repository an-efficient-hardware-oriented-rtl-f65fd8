// neuron: one neuron of the dropout layer, a MAC followed by the
// mask-enabled output stage (MAC -> D-latch in the algorithm's block
// diagram).
//
// The MAC sums x * w over the inputs of one sample; first clears it on the
// sample's first input. When last marks the final input, the sum is ready
// one clock later and is passed to the output stage, which keeps it if the
// neuron's mask bit is 1 and outputs zero otherwise. No activation
// function is applied here: the block diagram shows none, and the
// activation is left to whatever consumes y.
//
// Interface and timing: in a cycle with en = 1 the neuron takes x and w;
// first = 1 starts a new sum, last = 1 ends it. y holds the masked sum from
// two clocks after the last input until the next sample's result. keep is
// sampled one clock after the last input.
module neuron #(
  parameter int unsigned DATA_W = dropout_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = dropout_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] w,
  input  logic                     keep,
  output logic signed [ACC_W-1:0]  y
);

  logic signed [ACC_W-1:0] acc;
  logic                    done_q;

  mac #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_mac (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (en && first),
    .en    (en),
    .x     (x),
    .w     (w),
    .acc   (acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= en && last;
  end

  dropout_gate #(.W(ACC_W)) u_gate (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (done_q),
    .keep  (keep),
    .d     (acc),
    .q     (y)
  );

endmodule
