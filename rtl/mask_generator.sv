// mask_generator: the RNG-free dropout mask generator.
//
// Instead of drawing one random number per neuron and comparing it with
// the dropout ratio, the generator keeps one predefined mask and makes
// each new mask by rotating the current one by r bit positions. The
// control block (rotate_control) supplies r, the reconfigure block
// (reconfigure_block) rotates, and the mask store (mask_store) holds the
// result, which is both the dropout mask in use and the starting point of
// the next rotation. All N bits change in parallel, so a new mask costs one
// clock cycle whatever N is, and the number of ones (the dropout ratio) is
// the one of the predefined mask. This structure, the rotation and the
// one-cycle rate follow the algorithm; widths, reset values and the load
// port are this design's choices.
//
// Interface and timing: gen = 1 in a cycle makes mask show the new mask
// one clock later (one mask per cycle if gen is held high). init_we loads
// init_mask instead and has priority. r shows the rotate amount the next
// gen will use. The assertion is disabled during reset through rst_n, so
// lint tools may report rst_n as used both asynchronously and
// synchronously; that concerns the assertion only, not the circuit.
module mask_generator
  import dropout_pkg::*;
#(
  parameter int unsigned  N           = 64,
  parameter int unsigned  RW          = (N > 1) ? $clog2(N) : 1,
  parameter logic [N-1:0] PREDEF_MASK = N'(default_mask(N))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          gen,
  input  r_mode_e       mode,
  input  logic [RW-1:0] r_const,
  input  logic          init_we,
  input  logic [N-1:0]  init_mask,
  output logic [N-1:0]  mask,
  output logic [RW-1:0] r
);

  logic [N-1:0] rotated;

  rotate_control #(.N(N), .RW(RW)) u_control (
    .clk     (clk),
    .rst_n   (rst_n),
    .gen     (gen),
    .mode    (mode),
    .r_const (r_const),
    .r       (r)
  );

  reconfigure_block #(.N(N), .RW(RW)) u_reconfigure (
    .mask_in  (mask),
    .r        (r),
    .mask_out (rotated)
  );

  mask_store #(.N(N), .PREDEF_MASK(PREDEF_MASK)) u_store (
    .clk       (clk),
    .rst_n     (rst_n),
    .init_we   (init_we),
    .init_mask (init_mask),
    .gen       (gen),
    .new_mask  (rotated),
    .mask      (mask)
  );

  // A rotation never changes the dropout ratio.
  a_ratio_kept: assert property (
    @(posedge clk) disable iff (!rst_n)
    gen |-> $countones(rotated) == $countones(mask)
  ) else $error("mask_generator: rotation changed the number of kept neurons");

endmodule
