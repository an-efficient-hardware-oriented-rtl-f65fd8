// tb_workload_layers: runs the dropout layer at the sizes of the networks
// the algorithm was evaluated on, two samples each, in parallel:
//   MLP on MNIST:       784 inputs -> 500 neurons, 500 inputs -> 200 neurons
//   LeNet on CIFAR10:   1800 inputs -> 1000 neurons (fully-connected layer)
//   RNN language model: 650 inputs -> 650 neurons
// Each layer's outputs, applied masks (half of the neurons dropped) and
// result timing are checked by workload_driver.
module tb_workload_layers;
  logic clk = 1'b0, rst_n = 1'b1;
  int c [4], f [4], d [4];
  logic dn [4];
  int checks, failures;

  always #5 clk = ~clk;

  workload_driver #(.N(500),  .K(784))  u_mlp1  (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .dropped(d[0]), .done(dn[0]));
  workload_driver #(.N(200),  .K(500))  u_mlp2  (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .dropped(d[1]), .done(dn[1]));
  workload_driver #(.N(1000), .K(1800)) u_lenet (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .dropped(d[2]), .done(dn[2]));
  workload_driver #(.N(650),  .K(650))  u_rnnlm (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .dropped(d[3]), .done(dn[3]));

  initial begin
    #2 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (dn[0] && dn[1] && dn[2] && dn[3]);
    checks = 0; failures = 0;
    foreach (c[i]) begin
      checks += c[i];
      failures += f[i];
      $display("layer %0d: checks=%0d failures=%0d dropped=%0d", i, c[i], f[i], d[i]);
      checks++;
      if (d[i] == 0) begin
        failures++;
        $display("FAIL layer %0d dropped no neuron", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    checks = 0; failures = 1;
    foreach (c[i]) begin checks += c[i]; failures += f[i]; end
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
