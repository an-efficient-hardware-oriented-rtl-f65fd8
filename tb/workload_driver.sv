// workload_driver: drives one dropout_layer of N neurons with samples of
// K inputs and checks the results; used by tb_workload_layers.
//
// It sends SAMPLES back-to-back samples of K random inputs with random
// weights in training mode, r as a sequence. For each sample it computes
// the N sums and the expected mask (the built-in predefined mask rotated
// by 1, then 2, then 3, ... bit by bit), and compares every output, the
// applied mask and the result cycle (two clocks after the last beat). It
// counts dropped and kept neurons and raises done when finished.
module workload_driver #(
  parameter int unsigned N       = 64,
  parameter int unsigned K       = 16,
  parameter int unsigned SAMPLES = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   dropped,
  output logic done
);
  import dropout_pkg::*;

  localparam int unsigned DW = 16, AW = 40, RW = (N > 1) ? $clog2(N) : 1;

  logic x_valid = 1'b0, x_first = 1'b0, x_last = 1'b0;
  logic signed [DW-1:0] x = '0;
  logic signed [DW-1:0] w [N];
  logic y_valid;
  logic signed [AW-1:0] y [N];
  logic [N-1:0] y_mask, mask;
  logic [RW-1:0] r;

  dropout_layer #(.N(N)) dut (
    .clk, .rst_n, .x_valid, .x_first, .x_last, .x, .w,
    .dropout_en(1'b1), .r_mode(R_SEQUENCE), .r_const('0),
    .mask_init_we(1'b0), .mask_init('0),
    .y_valid, .y, .y_mask, .mask, .r
  );

  longint sum [N];
  logic [N-1:0] m_ref, keep_exp;
  int r_ref;

  initial begin
    checks = 0; failures = 0; dropped = 0; done = 1'b0;
    foreach (w[j]) w[j] = '0;
    m_ref = N'(default_mask(N));
    r_ref = 1;
    @(posedge rst_n);
    @(posedge clk); #1;
    for (int s = 0; s < SAMPLES; s++) begin
      foreach (sum[j]) sum[j] = 0;
      for (int k = 0; k < K; k++) begin
        x_valid = 1'b1;
        x_first = (k == 0);
        x_last  = (k == K - 1);
        x = DW'($urandom);
        foreach (w[j]) begin
          w[j] = DW'($urandom);
          sum[j] += longint'(x) * longint'(w[j]);
        end
        @(posedge clk); #1;
      end
      x_valid = 1'b0; x_first = 1'b0; x_last = 1'b0;
      for (int i = 0; i < N; i++) keep_exp[i] = m_ref[(i + r_ref) % N];
      m_ref = keep_exp;
      r_ref = (r_ref + 1 >= N) ? 1 : r_ref + 1;
      // y_valid must be high in the second cycle after the last beat.
      checks++;
      if (y_valid) begin
        failures++;
        $display("FAIL N=%0d: y_valid one clock early", N);
      end
      @(posedge clk); #1;
      checks++;
      if (!y_valid) begin
        failures++;
        $display("FAIL N=%0d: no y_valid two clocks after the last beat", N);
      end
      checks++;
      if (y_mask !== keep_exp) begin
        failures++;
        $display("FAIL N=%0d: applied mask differs", N);
      end
      checks++;
      if ($countones(y_mask) != N / 2) begin
        failures++;
        $display("FAIL N=%0d: %0d neurons kept, expected %0d", N, $countones(y_mask), N / 2);
      end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (y[j] !== AW'(keep_exp[j] ? sum[j] : 0)) begin
          failures++;
          if (failures < 5) $display("FAIL N=%0d neuron %0d", N, j);
        end
        if (!keep_exp[j]) dropped++;
      end
    end
    done = 1'b1;
  end
endmodule
