// mask_store: the predefined-mask memory and dropout-mask register of the
// RNG-free dropout mask generator.
//
// One N-bit register. At reset it holds PREDEF_MASK; the host may load
// another predefined mask at any time with init_we/init_mask. Each
// generation (gen = 1) writes the reconfigured mask back into it, which is
// the feedback drawn from the dropout mask to the predefined mask, so the
// next generation rotates the latest mask again. Its output is the dropout
// mask that enables the neurons. The algorithm draws the predefined mask
// and the dropout mask as two boxes; keeping them in one register is this
// design's choice, and matches a register count of N plus the few bits of
// r reported for the generator (70 registers for 64 bits).
//
// Interface and timing: init_we has priority over gen. The new mask is
// visible on mask one clock after gen or init_we. Reset is asynchronous,
// active low.
module mask_store #(
  parameter int unsigned   N           = 64,
  parameter logic [N-1:0]  PREDEF_MASK = N'(dropout_pkg::default_mask(N))
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init_we,    // load a predefined mask
  input  logic [N-1:0] init_mask,
  input  logic         gen,        // store the reconfigured mask
  input  logic [N-1:0] new_mask,
  output logic [N-1:0] mask
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask <= PREDEF_MASK;
    end else if (init_we) begin
      mask <= init_mask;
    end else if (gen) begin
      mask <= new_mask;
    end
  end

endmodule
