// tb_rotate_control: self-checking test of the control block.
//
// Two instances, N = 64 (the default) and N = 12 (to exercise the modulo
// reduction). A reference model written here, with its own LFSR, predicts
// r after every cycle for the constant, sequence and random settings,
// including cycles without gen (r must hold).
module tb_rotate_control;
  import dropout_pkg::*;

  localparam int unsigned NA = 64, RA = 6;
  localparam int unsigned NB = 12, RB = 4;

  logic clk = 1'b0, rst_n = 1'b1, gen = 1'b0;
  r_mode_e mode = R_CONST;
  logic [RA-1:0] rc_a = '0, r_a;
  logic [RB-1:0] rc_b = '0, r_b;
  int checks = 0, failures = 0;
  int exp_a, exp_b;
  logic [15:0] ref_lfsr;

  always #5 clk = ~clk;

  rotate_control #(.N(NA)) dut_a (.clk, .rst_n, .gen, .mode, .r_const(rc_a), .r(r_a));
  rotate_control #(.N(NB)) dut_b (.clk, .rst_n, .gen, .mode, .r_const(rc_b), .r(r_b));

  function automatic logic [15:0] ref_step(logic [15:0] s);
    logic fb;
    fb = s[15] ^ s[13] ^ s[12] ^ s[10];
    return {s[14:0], fb};
  endfunction

  task automatic check(string what);
    checks++;
    if (r_a != RA'(exp_a) || r_b != RB'(exp_b)) begin
      failures++;
      $display("FAIL %s: r_a=%0d exp %0d, r_b=%0d exp %0d", what, r_a, exp_a, r_b, exp_b);
    end
  endtask

  task automatic step(logic g);
    gen = g;
    @(posedge clk);
    #1;
  endtask

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    exp_a = 1; exp_b = 1;
    check("reset value");

    // constant
    mode = R_CONST;
    for (int k = 0; k < 20; k++) begin
      rc_a = RA'($urandom_range(0, 63));
      rc_b = RB'($urandom_range(0, 15));
      step(1'b1);
      exp_a = rc_a % NA; exp_b = rc_b % NB;
      check("constant");
    end
    rc_a = 6'd7; rc_b = 4'd3;
    step(1'b0);
    check("constant hold");

    // sequence
    mode = R_SEQUENCE;
    for (int k = 0; k < 140; k++) begin
      logic g;
      g = (k % 7) != 3;
      step(g);
      if (g) begin
        exp_a = (exp_a + 1 >= NA) ? 1 : exp_a + 1;
        exp_b = (exp_b + 1 >= NB) ? 1 : exp_b + 1;
      end
      check("sequence");
    end

    // random
    mode = R_RANDOM;
    ref_lfsr = 16'hACE1;
    for (int k = 0; k < 200; k++) begin
      logic g;
      g = (k % 5) != 0;
      step(g);
      if (g) begin
        ref_lfsr = ref_step(ref_lfsr);
        exp_a = ref_lfsr % NA; if (exp_a == 0) exp_a = 1;
        exp_b = ref_lfsr % NB; if (exp_b == 0) exp_b = 1;
      end
      check("random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
