// dropout_layer: a fully-connected layer of N neurons with RNG-free
// dropout on its outputs.
//
// Every neuron has its own MAC and a mask-enabled output stage. The input
// vector of one sample is streamed in one element per beat, together with
// the N weights that connect that element to the N neurons, so all N
// neurons accumulate in parallel. The first beat of a sample also makes the
// mask generator produce a new dropout mask (one rotation of the stored
// mask, one clock), so the mask changes for every input sample. When the
// sums are complete each neuron's output stage keeps its sum if its mask
// bit is 1 and outputs zero otherwise, as y = mask * (W . x).
//
// Following the algorithm: the predefined mask, the control block with
// rotate amount r, the reconfigure block (rotation), the write-back of the
// new mask and the masking of the MAC outputs. This design's own choices:
// the streaming order (one input element per beat, all neurons in
// parallel), the first/last framing, signed fixed-point widths, no bias or
// activation function (the block diagram shows none), and the dropout_en
// input: with dropout_en = 0 (inference) every neuron is kept and the mask
// is not advanced. dropout_en is taken on each sample's first beat and
// applies to that whole sample. No scaling by the keep ratio is applied.
//
// Interface and timing:
//   x_valid  a beat: x is input element k, w[j] its weight to neuron j
//   x_first  first beat of a sample (clears the sums, generates a mask)
//   x_last   last beat of a sample (may coincide with x_first)
//   y_valid  one-cycle pulse two clocks after the x_last beat; y[j] and
//            y_mask (the mask applied) then hold until the next result.
// A new sample may start in the cycle right after x_last. mask_init_we
// loads a predefined mask; do it between samples. Reset is asynchronous,
// active low; the mask resets to the built-in predefined mask. An
// immediate assertion checks the framing: every beat belongs to a sample
// opened with x_first.
module dropout_layer
  import dropout_pkg::*;
#(
  parameter int unsigned  N           = 64,
  parameter int unsigned  DATA_W      = dropout_pkg::DEF_DATA_W,
  parameter int unsigned  ACC_W       = dropout_pkg::DEF_ACC_W,
  parameter int unsigned  RW          = (N > 1) ? $clog2(N) : 1,
  parameter logic [N-1:0] PREDEF_MASK = N'(default_mask(N))
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input and weight stream
  input  logic                     x_valid,
  input  logic                     x_first,
  input  logic                     x_last,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] w [N],
  // dropout control
  input  logic                     dropout_en,
  input  r_mode_e                  r_mode,
  input  logic [RW-1:0]            r_const,
  input  logic                     mask_init_we,
  input  logic [N-1:0]             mask_init,
  // results
  output logic                     y_valid,
  output logic signed [ACC_W-1:0]  y [N],
  output logic [N-1:0]             y_mask,
  output logic [N-1:0]             mask,
  output logic [RW-1:0]            r
);

  logic         gen;
  logic         done_q;
  logic         train_q;   // dropout_en as sampled on the sample's first beat
  logic [N-1:0] keep;

  assign gen  = x_valid && x_first && dropout_en;
  assign keep = train_q ? mask : '1;

  mask_generator #(.N(N), .RW(RW), .PREDEF_MASK(PREDEF_MASK)) u_maskgen (
    .clk       (clk),
    .rst_n     (rst_n),
    .gen       (gen),
    .mode      (r_mode),
    .r_const   (r_const),
    .init_we   (mask_init_we),
    .init_mask (mask_init),
    .mask      (mask),
    .r         (r)
  );

  for (genvar j = 0; j < N; j++) begin : g_neuron
    neuron #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_neuron (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (x_valid),
      .first (x_first),
      .last  (x_last),
      .x     (x),
      .w     (w[j]),
      .keep  (keep[j]),
      .y     (y[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q  <= 1'b0;
      train_q <= 1'b0;
      y_valid <= 1'b0;
      y_mask  <= '0;
    end else begin
      done_q  <= x_valid && x_last;
      if (x_valid && x_first) train_q <= dropout_en;
      y_valid <= done_q;
      if (done_q) y_mask <= keep;
    end
  end

  // Framing rule: every sample opens with x_first before (or with) x_last.
  logic open_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q <= 1'b0;
    end else if (x_valid) begin
      assert (x_first || open_q)
        else $error("dropout_layer: input beat outside a sample (no x_first)");
      open_q <= !x_last;
    end
  end

endmodule
