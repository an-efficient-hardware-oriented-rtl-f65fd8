// tb_neuron: self-checking test of one neuron (MAC plus output stage).
//
// Streams samples of random length, some back to back and some with
// gaps and idle beats, with a random keep bit per sample. Two clocks after
// each last beat the output must equal the sum of x*w of that sample, or
// zero if the neuron was dropped; it must then hold until the next result.
module tb_neuron;
  localparam int unsigned DW = 16, AW = 40;

  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0, first = 1'b0, last = 1'b0, keep = 1'b0;
  logic signed [DW-1:0] x = '0, w = '0;
  logic signed [AW-1:0] y;
  longint sum, expect_y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  neuron #(.DATA_W(DW), .ACC_W(AW)) dut (.*);

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    expect_y = 0;
    for (int s = 0; s < 80; s++) begin
      int len, k;
      logic kp;
      len = $urandom_range(1, 12);
      kp  = $urandom_range(0, 1);
      sum = 0;
      k = 0;
      while (k < len) begin
        en    = ($urandom_range(0, 3) != 0) || (k == 0);
        first = (k == 0);
        last  = (k == len - 1);
        x     = DW'($urandom);
        w     = DW'($urandom);
        @(posedge clk);
        if (en) begin
          sum += longint'(x) * longint'(w);
          k++;
        end
        #1;
      end
      en = 1'b0; first = 1'b0; last = 1'b0;
      keep = kp;                       // sampled one clock after the last beat
      // Output unchanged until the result arrives.
      checks++;
      if (y !== AW'(expect_y)) failures++;
      @(posedge clk); #1;
      expect_y = kp ? sum : 0;
      checks++;
      if (y !== AW'(expect_y)) begin
        failures++;
        if (failures < 10) $display("FAIL sample %0d keep=%b y=%0d exp %0d", s, kp, y, expect_y);
      end
      repeat ($urandom_range(0, 2)) begin
        @(posedge clk); #1;
        checks++;
        if (y !== AW'(expect_y)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
