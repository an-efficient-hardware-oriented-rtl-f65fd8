// tb_dropout_gate: self-checking test of the mask-enabled output stage.
//
// On load the output must take d when keep = 1 and zero when keep = 0
// (a dropped neuron outputs 0, not its previous value); without load it
// must hold.
module tb_dropout_gate;
  localparam int unsigned W = 40;

  logic clk = 1'b0, rst_n = 1'b1, load = 1'b0, keep = 1'b0;
  logic signed [W-1:0] d = '0, q, model;
  int checks = 0, failures = 0, kept = 0, dropped = 0;

  always #5 clk = ~clk;

  dropout_gate #(.W(W)) dut (.*);

  initial begin
    #2 rst_n = 1'b0;
    #1;
    model = '0;
    checks++;
    if (q !== model) failures++;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      load = ($urandom_range(0, 2) != 0);
      keep = $urandom_range(0, 1);
      d    = W'({$urandom, $urandom});
      @(posedge clk);
      if (load) begin
        model = keep ? d : '0;
        if (keep) kept++; else dropped++;
      end
      #1;
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 10) $display("FAIL load=%b keep=%b q=%0d exp %0d", load, keep, q, model);
      end
    end
    $display("kept %0d, dropped %0d", kept, dropped);
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
