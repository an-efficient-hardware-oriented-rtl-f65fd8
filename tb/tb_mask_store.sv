// tb_mask_store: self-checking test of the mask register.
//
// Checks the reset value (the built-in balanced mask: half of the bits
// set), that init_we loads a predefined mask and wins over gen, that gen
// stores new_mask one clock later, and that the register holds otherwise.
module tb_mask_store;
  localparam int unsigned N = 64;

  logic clk = 1'b0, rst_n = 1'b1;
  logic init_we = 1'b0, gen = 1'b0;
  logic [N-1:0] init_mask = '0, new_mask = '0, mask, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mask_store #(.N(N)) dut (.*);

  task automatic check(string what);
    checks++;
    if (mask !== model) begin
      failures++;
      $display("FAIL %s: %h exp %h", what, mask, model);
    end
  endtask

  initial begin
    #2 rst_n = 1'b0;
    #1;
    checks++;
    if ($countones(mask) != N / 2) begin
      failures++;
      $display("FAIL reset mask not balanced: %h", mask);
    end
    model = mask;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      init_we   = ($urandom_range(0, 9) == 0);
      gen       = ($urandom_range(0, 2) != 0);
      init_mask = {$urandom, $urandom};
      new_mask  = {$urandom, $urandom};
      @(posedge clk);
      if (init_we)  model = init_mask;
      else if (gen) model = new_mask;
      #1;
      check("update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
