// reconfigure_block: the reconfiguration block of the RNG-free dropout
// mask generator.
//
// It rotates an N-bit mask by r positions in one combinational step:
//   mask_out[i] = mask_in[(i + r) mod N]
// which is the rule mask[0:n] = {mask[r:n], mask[0:r-1]} given for the
// algorithm, read with bit 0 as the first element. The published five-bit
// example (1,0,1,1,0 becoming 0,1,0,1,1 for r = 1, the element at one end
// moving to the other) matches it when bit 0 is the last element listed;
// which end is bit 0 is this design's reading. A rotation keeps
// the number of ones, so the dropout ratio of the predefined mask is kept.
// It is built as a shift of the mask written twice, i.e. a barrel shifter.
//
// Interface: purely combinational; r must be below N (the control block
// guarantees this). No clock, no latency.
module reconfigure_block #(
  parameter int unsigned N  = 64,
  parameter int unsigned RW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  mask_in,
  input  logic [RW-1:0] r,
  output logic [N-1:0]  mask_out
);

  always_comb begin
    mask_out = N'({mask_in, mask_in} >> r);
  end

endmodule
