// tb_axsum: random check of the approximate multi-operand adder.
//
// Two instances with the same four operands of sizes 8, 7, 10 and 5 bits, of
// which the first and third are approximated: one keeps K = 2 MSBs, the other
// K = 3, both add a constant 13. Each sum is compared with a reference that
// truncates by shifting right and back left. Operands 0 and 2 cover every
// dropped-bit pattern; exact operands 1 and 3 must pass through whole.
module tb_axsum;
  int checks = 0, failures = 0;

  localparam int N = 4;
  localparam int NB [N] = '{8, 7, 10, 5};
  localparam bit AX [N] = '{1'b1, 1'b0, 1'b1, 1'b0};

  logic [9:0]  p [N];
  logic [11:0] s2, s3;

  axsum #(.N(N), .OPW(10), .NB(NB), .AX(AX), .K(2), .BIAS(13), .SUM_W(12)) dut2 (.p(p), .s(s2));
  axsum #(.N(N), .OPW(10), .NB(NB), .AX(AX), .K(3), .BIAS(13), .SUM_W(12)) dut3 (.p(p), .s(s3));

  function automatic int ref_sum(int k);
    int acc, t;
    acc = 13;
    for (int i = 0; i < N; i++) begin
      t = int'(p[i]);
      if (AX[i]) t = (t >> (NB[i] - k)) << (NB[i] - k);
      acc += t;
    end
    return acc;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < N; i++) p[i] = 10'($urandom_range(0, (1 << NB[i]) - 1));
      if (it == 0) for (int i = 0; i < N; i++) p[i] = 10'((1 << NB[i]) - 1);
      #1;
      checks += 2;
      if (int'(s2) != ref_sum(2)) begin
        failures++;
        $display("FAIL k=2 got %0d exp %0d", s2, ref_sum(2));
      end
      if (int'(s3) != ref_sum(3)) begin
        failures++;
        $display("FAIL k=3 got %0d exp %0d", s3, ref_sum(3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
