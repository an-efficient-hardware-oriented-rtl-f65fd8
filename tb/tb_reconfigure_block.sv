// tb_reconfigure_block: self-checking test of the rotation.
//
// Checks the published five-bit example (1,0,1,1,0 listed from bit 4 to
// bit 0 becomes 0,1,0,1,1 for r = 1), then random
// masks and every r for N = 64 against a bit-by-bit reference
// out[i] = in[(i + r) mod N], and that the number of ones is kept.
module tb_reconfigure_block;
  localparam int unsigned N = 64, RW = 6;

  logic [N-1:0]  in_a, out_a;
  logic [RW-1:0] r_a;
  logic [4:0]    in_b, out_b;
  logic [2:0]    r_b;
  int checks = 0, failures = 0;

  reconfigure_block #(.N(N)) dut_a (.mask_in(in_a), .r(r_a), .mask_out(out_a));
  reconfigure_block #(.N(5)) dut_b (.mask_in(in_b), .r(r_b), .mask_out(out_b));

  initial begin
    // Five-bit example, 1,0,1,1,0 = bits 4..0.
    in_b = 5'b10110;
    r_b  = 3'd1;
    #1;
    checks++;
    if (out_b !== 5'b01011) begin
      failures++;
      $display("FAIL five-bit example: got %b", out_b);
    end
    for (int rr = 0; rr < 5; rr++) begin
      r_b = 3'(rr);
      #1;
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (out_b[i] !== in_b[(i + rr) % 5]) failures++;
      end
    end

    for (int t = 0; t < 40; t++) begin
      in_a = {$urandom, $urandom};
      for (int rr = 0; rr < N; rr++) begin
        r_a = RW'(rr);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (out_a[i] !== in_a[(i + rr) % N]) begin
            failures++;
            if (failures < 10) $display("FAIL r=%0d bit %0d", rr, i);
          end
        end
        checks++;
        if ($countones(out_a) != $countones(in_a)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
