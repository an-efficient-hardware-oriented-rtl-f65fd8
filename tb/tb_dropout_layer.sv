// tb_dropout_layer: end-to-end test of the dropout layer at its default
// size (64 neurons, 16-bit data, 40-bit sums), with no parameter override.
//
// A driver streams samples of random length (one of them 784 inputs long,
// the size of an MNIST image), with random weights, idle beats, gaps and
// back-to-back starts. For every sample it works out, independently of the
// design, the 64 sums and the mask that must be applied: its own copy of
// the mask is rotated bit by bit on each sample's first beat with its own
// model of r (constant, sequence, random). A monitor checks every y_valid
// pulse against that expectation, including its cycle (two clocks after
// the last beat). The test walks through training with each r setting,
// inference (dropout off), and a run-time load of a predefined mask, and
// counts how often each mechanism occurred; one that never occurred is a
// failure.
module tb_dropout_layer;
  import dropout_pkg::*;

  localparam int unsigned N = 64, DW = 16, AW = 40, RW = 6;

  logic clk = 1'b0, rst_n = 1'b1;
  logic x_valid = 1'b0, x_first = 1'b0, x_last = 1'b0;
  logic signed [DW-1:0] x = '0;
  logic signed [DW-1:0] w [N];
  logic dropout_en = 1'b1, mask_init_we = 1'b0;
  r_mode_e r_mode = R_SEQUENCE;
  logic [RW-1:0] r_const = '0;
  logic [N-1:0] mask_init = '0;
  logic y_valid;
  logic signed [AW-1:0] y [N];
  logic [N-1:0] y_mask, mask;
  logic [RW-1:0] r;

  int checks = 0, failures = 0;
  longint cycle = 0;

  // Reference state.
  logic [N-1:0] m_ref;
  int           r_ref;
  logic [15:0]  lf_ref;

  typedef struct {
    longint       sum [N];
    logic [N-1:0] keep;
    longint       due;
  } result_t;
  result_t expq [$];

  // Mechanism counters.
  int n_train = 0, n_infer = 0, n_regen = 0, n_dropped = 0, n_kept = 0;
  int n_const = 0, n_seq = 0, n_rand = 0, n_init = 0, n_b2b = 0, n_single = 0, n_long = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dropout_layer dut (.*);

  function automatic logic [N-1:0] rot(logic [N-1:0] m, int rr);
    logic [N-1:0] o;
    for (int i = 0; i < N; i++) o[i] = m[(i + rr) % N];
    return o;
  endfunction

  function automatic void advance_r();
    unique case (r_mode)
      R_CONST:    r_ref = r_const % N;
      R_SEQUENCE: r_ref = (r_ref + 1 >= N) ? 1 : r_ref + 1;
      default: begin
        lf_ref = {lf_ref[14:0], lf_ref[15] ^ lf_ref[13] ^ lf_ref[12] ^ lf_ref[10]};
        r_ref  = 32'(lf_ref) % N;
        if (r_ref == 0) r_ref = 1;
      end
    endcase
  endfunction

  // Send one sample of len beats; gap = idle beats inside the sample.
  task automatic send(int len, bit gaps, bit b2b);
    result_t e;
    logic [N-1:0] prev;
    int k;
    for (int j = 0; j < N; j++) e.sum[j] = 0;
    prev = m_ref;
    k = 0;
    while (k < len) begin
      x_valid = (k == 0) || !gaps || ($urandom_range(0, 3) != 0);
      x_first = (k == 0);
      x_last  = (k == len - 1);
      x       = DW'($urandom);
      foreach (w[j]) w[j] = DW'($urandom);
      @(posedge clk);
      if (x_valid) begin
        for (int j = 0; j < N; j++) e.sum[j] += longint'(x) * longint'(w[j]);
        if (k == 0 && dropout_en) begin
          m_ref = rot(m_ref, r_ref);
          advance_r();
        end
        k++;
      end
      #1;
    end
    e.keep = dropout_en ? m_ref : '1;
    e.due  = cycle + 1;          // y_valid high two clocks after the last beat
    expq.push_back(e);
    if (dropout_en) begin
      n_train++;
      if (m_ref != prev) n_regen++;
      n_dropped += N - $countones(m_ref);
      n_kept    += $countones(m_ref);
      unique case (r_mode)
        R_CONST:    n_const++;
        R_SEQUENCE: n_seq++;
        default:    n_rand++;
      endcase
    end else begin
      n_infer++;
    end
    if (len == 1) n_single++;
    if (len >= 784) n_long++;
    if (b2b) n_b2b++;
    x_valid = 1'b0; x_first = 1'b0; x_last = 1'b0;
  endtask

  // Monitor.
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      result_t e;
      // Sampled at the clock edge, before the design updates its outputs.
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected y_valid at cycle %0d", cycle);
      end else begin
        e = expq.pop_front();
        if (cycle != e.due) begin
          failures++;
          $display("FAIL latency: y_valid at cycle %0d, expected %0d", cycle, e.due);
        end
        checks++;
        if (y_mask !== e.keep) begin
          failures++;
          $display("FAIL mask applied %h, expected %h", y_mask, e.keep);
        end
        for (int j = 0; j < N; j++) begin
          longint ey;
          ey = e.keep[j] ? e.sum[j] : 0;
          checks++;
          if (y[j] !== AW'(ey)) begin
            failures++;
            if (failures < 12) $display("FAIL neuron %0d: y=%0d expected %0d", j, y[j], ey);
          end
        end
      end
    end
  end

  initial begin
    foreach (w[j]) w[j] = '0;
    #2 rst_n = 1'b0;
    m_ref  = N'(default_mask(N));
    r_ref  = 1;
    lf_ref = 16'hACE1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // Training, r as a sequence (the setting of most experiments).
    r_mode = R_SEQUENCE;
    send(784, 1'b0, 1'b0);
    repeat (3) @(posedge clk); #1;
    for (int s = 0; s < 8; s++) send($urandom_range(1, 20), 1'b1, s > 0);
    send(1, 1'b0, 1'b1);
    repeat (4) @(posedge clk); #1;

    // Training, constant r (1, 2, 4, 8, 16, 32 as in the r study).
    r_mode = R_CONST;
    for (int p = 0; p < 6; p++) begin
      r_const = RW'(1 << p);
      send($urandom_range(2, 10), 1'b1, 1'b0);
      send($urandom_range(2, 10), 1'b0, 1'b1);
      @(posedge clk); #1;
    end

    // Training, random r.
    r_mode = R_RANDOM;
    for (int s = 0; s < 8; s++) send($urandom_range(1, 12), 1'b1, 1'b1);
    repeat (3) @(posedge clk); #1;

    // Load a new predefined mask (a quarter kept), then train again.
    mask_init_we = 1'b1;
    mask_init    = {16{4'b0001}};
    @(posedge clk); #1;
    mask_init_we = 1'b0;
    m_ref = {16{4'b0001}};
    n_init++;
    r_mode = R_SEQUENCE;
    for (int s = 0; s < 4; s++) send($urandom_range(1, 12), 1'b1, 1'b1);
    repeat (3) @(posedge clk); #1;

    // Inference: no neuron dropped, mask not advanced.
    dropout_en = 1'b0;
    for (int s = 0; s < 4; s++) send($urandom_range(1, 12), 1'b1, 1'b1);
    dropout_en = 1'b1;
    send(5, 1'b0, 1'b1);

    repeat (6) @(posedge clk); #1;
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results never came out", expq.size());
    end

    $display("mechanisms: train=%0d infer=%0d regen=%0d dropped=%0d kept=%0d const=%0d seq=%0d rand=%0d init=%0d b2b=%0d single=%0d long=%0d",
             n_train, n_infer, n_regen, n_dropped, n_kept, n_const, n_seq, n_rand, n_init, n_b2b, n_single, n_long);
    begin
      int cnt [12];
      cnt = '{n_train, n_infer, n_regen, n_dropped, n_kept, n_const, n_seq, n_rand, n_init, n_b2b, n_single, n_long};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", i);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
