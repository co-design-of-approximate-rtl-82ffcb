// tb_argmax: random and tie-heavy check of the argmax over 10 signed 8-bit
// values. Values are drawn from a narrow range half of the time so that ties
// are frequent; the expected index is the first maximum.
module tb_argmax;
  int checks = 0, failures = 0, ties = 0;

  logic signed [7:0] d [10];
  logic [3:0]        idx;

  argmax #(.N(10), .D_W(8)) dut (.d(d), .idx(idx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int best, nbest;
      for (int i = 0; i < 10; i++)
        d[i] = (it % 2 == 0) ? 8'($urandom) : 8'($urandom_range(0, 4) - 2);
      #1;
      best = 0;
      for (int i = 1; i < 10; i++) if (d[i] > d[best]) best = i;
      nbest = 0;
      for (int i = 0; i < 10; i++) if (d[i] == d[best]) nbest++;
      if (nbest > 1) ties++;
      checks++;
      if (int'(idx) != best) begin
        failures++;
        $display("FAIL got %0d exp %0d", idx, best);
      end
    end
    checks++;
    if (ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
