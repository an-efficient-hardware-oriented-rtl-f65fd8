// tb_mask_generator: self-checking test of the RNG-free mask generator.
//
// Runs the 64-bit default and an 8-bit instance (the two mask sizes of the
// resource comparison) side by side. A reference model written here keeps
// its own mask and rotate amount for the constant, sequence and random
// settings, rotates bit by bit, and is compared with the generator every
// cycle. With gen held high the mask must change on every clock (one mask
// per cycle), and the number of ones must never change.
module tb_mask_generator;
  import dropout_pkg::*;

  localparam int unsigned NA = 64, RA = 6;
  localparam int unsigned NB = 8,  RB = 3;

  logic clk = 1'b0, rst_n = 1'b1, gen = 1'b0, init_we = 1'b0;
  r_mode_e mode = R_SEQUENCE;
  logic [RA-1:0] rc_a = '0, r_a;
  logic [RB-1:0] rc_b = '0, r_b;
  logic [NA-1:0] init_a = '0, mask_a, m_a;
  logic [NB-1:0] init_b = '0, mask_b, m_b;
  int ra, rb, pop_a, pop_b, changes;
  logic [15:0] lf;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mask_generator #(.N(NA)) dut_a (.clk, .rst_n, .gen, .mode, .r_const(rc_a), .init_we,
                                  .init_mask(init_a), .mask(mask_a), .r(r_a));
  mask_generator #(.N(NB)) dut_b (.clk, .rst_n, .gen, .mode, .r_const(rc_b), .init_we,
                                  .init_mask(init_b), .mask(mask_b), .r(r_b));

  function automatic logic [NA-1:0] rot_a(logic [NA-1:0] m, int r);
    logic [NA-1:0] o;
    for (int i = 0; i < NA; i++) o[i] = m[(i + r) % NA];
    return o;
  endfunction
  function automatic logic [NB-1:0] rot_b(logic [NB-1:0] m, int r);
    logic [NB-1:0] o;
    for (int i = 0; i < NB; i++) o[i] = m[(i + r) % NB];
    return o;
  endfunction

  task automatic compare(string what);
    checks++;
    if (mask_a !== m_a || mask_b !== m_b) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: a=%h exp %h  b=%h exp %h", what, mask_a, m_a, mask_b, m_b);
    end
    checks++;
    if ($countones(mask_a) != pop_a || $countones(mask_b) != pop_b) begin
      failures++;
      $display("FAIL %s: dropout ratio changed", what);
    end
  endtask

  // One clock with the given gen; the model advances the same way.
  task automatic cycle(logic g);
    gen = g;
    @(posedge clk);
    if (init_we) begin
      m_a = init_a; m_b = init_b;
      pop_a = $countones(init_a); pop_b = $countones(init_b);
    end else if (g) begin
      m_a = rot_a(m_a, ra);
      m_b = rot_b(m_b, rb);
    end
    // The control block advances r on every gen, even one overridden by init_we.
    if (g) begin
      unique case (mode)
        R_CONST:    begin ra = rc_a % NA; rb = rc_b % NB; end
        R_SEQUENCE: begin ra = (ra + 1 >= NA) ? 1 : ra + 1; rb = (rb + 1 >= NB) ? 1 : rb + 1; end
        default: begin
          lf = {lf[14:0], lf[15] ^ lf[13] ^ lf[12] ^ lf[10]};
          ra = 32'(lf) % NA; if (ra == 0) ra = 1;
          rb = 32'(lf) % NB; if (rb == 0) rb = 1;
        end
      endcase
    end
    #1;
  endtask

  initial begin
    #2 rst_n = 1'b0;
    #1;
    // Reset: built-in balanced masks, r = 1.
    m_a = NA'(default_mask(NA));
    m_b = NB'(default_mask(NB));
    pop_a = NA / 2; pop_b = NB / 2;
    ra = 1; rb = 1; lf = 16'hACE1;
    compare("reset");
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;

    // Sequence, gen held high: one new mask every clock.
    mode = R_SEQUENCE;
    changes = 0;
    for (int k = 0; k < 100; k++) begin
      logic [NA-1:0] prev_a;
      prev_a = mask_a;
      cycle(1'b1);
      compare("sequence");
      if (mask_a != prev_a) changes++;
    end
    checks++;
    if (changes < 99) begin
      failures++;
      $display("FAIL rate: only %0d of 100 clocks produced a new mask", changes);
    end

    // Idle cycles hold the mask.
    repeat (5) begin
      cycle(1'b0);
      compare("hold");
    end

    // Load a predefined mask, then rotate with constant r.
    init_we = 1'b1;
    init_a  = 64'h0000_0000_FFFF_FFFF;
    init_b  = 8'b0000_0011;
    cycle(1'b1);
    compare("init has priority");
    init_we = 1'b0;
    mode = R_CONST;
    for (int k = 0; k < 60; k++) begin
      rc_a = RA'($urandom_range(0, 63));
      rc_b = RB'($urandom_range(0, 7));
      cycle($urandom_range(0, 3) != 0);
      compare("constant");
    end

    // Random r.
    mode = R_RANDOM;
    for (int k = 0; k < 200; k++) begin
      cycle($urandom_range(0, 4) != 0);
      compare("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
