// dropout_pkg: types and constants shared by the RNG-free dropout layer.
//
// r_mode_e selects how the control block produces the rotate amount r for
// each new dropout mask. The three choices (constant, sequence, random) are
// the three settings of r that the algorithm was evaluated with; their
// encoding is this design's own. DEF_DATA_W and DEF_ACC_W are the default
// fixed-point widths of the neuron datapath, which the algorithm leaves
// open. default_mask() builds a balanced predefined mask (half of the bits
// set, i.e. a dropout ratio of 0.5) from a fixed 16-bit LFSR sequence, so
// the layer has a usable mask straight out of reset; the host may load any
// other predefined mask at run time.
package dropout_pkg;

  typedef enum logic [1:0] {
    R_CONST    = 2'd0,  // r = r_const for every generation
    R_SEQUENCE = 2'd1,  // r = 1, 2, 3, ..., N-1, 1, 2, ...
    R_RANDOM   = 2'd2   // r drawn from a 16-bit LFSR, reduced modulo N
  } r_mode_e;

  localparam int unsigned DEF_DATA_W = 16;    // input and weight width (signed)
  localparam int unsigned DEF_ACC_W  = 40;    // accumulator width (signed)
  localparam int unsigned MAX_N  = 1024;   // widest mask default_mask() can build

  localparam logic [15:0] LFSR_SEED = 16'hACE1;

  // One step of a 16-bit Fibonacci LFSR, taps 16,14,13,11 (maximal length).
  function automatic logic [15:0] lfsr16_next(input logic [15:0] s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  // Balanced pattern: bit i follows the LFSR, except that once n/2 ones
  // (or n - n/2 zeros) have been placed the remaining bits are forced, so
  // exactly n/2 bits are 1.
  function automatic logic [MAX_N-1:0] default_mask(input int unsigned n);
    logic [MAX_N-1:0] m;
    logic [15:0]      s;
    int unsigned      ones, zeros;
    m = '0;
    s = LFSR_SEED;
    ones = 0;
    zeros = 0;
    for (int unsigned i = 0; i < MAX_N; i++) begin
      if (i < n) begin
        if (ones == n / 2) begin
          m[i] = 1'b0;
        end else if (zeros == n - n / 2) begin
          m[i] = 1'b1;
        end else begin
          m[i] = s[0];
        end
        if (m[i]) ones++;
        else      zeros++;
        s = lfsr16_next(s);
      end
    end
    return m;
  endfunction

endpackage
