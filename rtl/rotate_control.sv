// rotate_control: the control block of the RNG-free dropout mask generator.
//
// It holds the rotate amount r that the reconfigure block applies to the
// stored mask, and advances it once per mask generation (gen = 1):
//   R_CONST    r is loaded from r_const (reduced modulo N).
//   R_SEQUENCE r steps 1, 2, ..., N-1 and wraps back to 1.
//   R_RANDOM   r is the low bits of a 16-bit LFSR, reduced modulo N; a
//              result of 0 is replaced by 1 so that every generation
//              changes the mask.
// The algorithm states only that r was studied as a constant, a sequence
// and random, and that it comes from a control block; the counter, the
// LFSR and the skipping of r = 0 are this design's choices. The LFSR is a
// 16-bit shift register and only exists for the random setting.
//
// Interface and timing: r is a register. The value on r is the one used
// for the generation happening in the current cycle; the value for the
// next generation appears one clock after gen. Changing mode takes effect
// at the next gen. Reset is asynchronous and active low; r resets to 1.
module rotate_control
  import dropout_pkg::*;
#(
  parameter int unsigned N  = 64,
  parameter int unsigned RW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          gen,       // a new mask is generated this cycle
  input  r_mode_e       mode,
  input  logic [RW-1:0] r_const,
  output logic [RW-1:0] r
);

  logic [15:0]   lfsr_q;
  logic [15:0]   lfsr_d;
  logic [RW-1:0] r_d;
  logic [RW-1:0] r_rand;
  logic [RW-1:0] r_seq;

  assign lfsr_d = lfsr16_next(lfsr_q);

  always_comb begin
    r_rand = RW'(32'(lfsr_d) % N);
    if (r_rand == '0) r_rand = RW'(1);
    r_seq = (32'(r) + 1 >= N) ? RW'(1) : RW'(32'(r) + 1);
    unique case (mode)
      R_CONST:    r_d = RW'(32'(r_const) % N);
      R_SEQUENCE: r_d = r_seq;
      R_RANDOM:   r_d = r_rand;
      default:    r_d = r;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r      <= RW'(1);
      lfsr_q <= LFSR_SEED;
    end else if (gen) begin
      r <= r_d;
      if (mode == R_RANDOM) lfsr_q <= lfsr_d;
    end
  end

endmodule
