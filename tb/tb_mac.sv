// tb_mac: self-checking test of the multiply-accumulate unit.
//
// Feeds random signed operands in random-length sums, with idle cycles in
// between, and compares the accumulator after every clock with a sum
// computed here in 64-bit integers. Also checks full-scale negative
// products and the clear without enable.
module tb_mac;
  localparam int unsigned DW = 16, AW = 40;

  logic clk = 1'b0, rst_n = 1'b1, clr = 1'b0, en = 1'b0;
  logic signed [DW-1:0] x = '0, w = '0;
  logic signed [AW-1:0] acc;
  longint model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mac #(.DATA_W(DW), .ACC_W(AW)) dut (.*);

  task automatic check(string what);
    checks++;
    if (acc !== AW'(model)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: acc=%0d exp %0d", what, acc, model);
    end
  endtask

  initial begin
    #2 rst_n = 1'b0;
    #1;
    model = 0;
    check("reset");
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 60; s++) begin
      int len;
      len = $urandom_range(1, 40);
      for (int k = 0; k < len; k++) begin
        en  = ($urandom_range(0, 5) != 0);
        clr = (k == 0);
        x   = DW'($urandom);
        w   = DW'($urandom);
        if (s == 3) begin x = -16'sd32768; w = 16'sd32767; en = 1'b1; end
        @(posedge clk);
        if (en) model = (clr ? 0 : model) + longint'(x) * longint'(w);
        else if (clr) model = 0;
        #1;
        check("accumulate");
      end
    end
    en = 1'b0; clr = 1'b0;
    @(posedge clk); #1;
    check("hold");
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
