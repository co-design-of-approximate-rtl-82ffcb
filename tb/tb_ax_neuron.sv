// tb_ax_neuron: random check of four approximate neurons against the
// reference model of ax_ref_pkg.
//   A: mixed signs, ReLU, G = 1/4, K = 2 (two products approximated)
//   B: the same neuron without ReLU (raw S', including the ones'-complement -1)
//   C: positive coefficients and bias only (negative side omitted), K = 1
//   D: hidden-layer style inputs of 10, 6 and 8 bits, negative bias, K = 3
// It also counts ReLU clamps and products that actually lost bits, and fails
// if either never happened.
module tb_ax_neuron;
  import ax_ref_pkg::*;
  int checks = 0, failures = 0, lossy = 0, clamped = 0;

  localparam int WA [4] = '{8, -2, 1, -16};
  localparam int EA [4] = '{default: 8};
  localparam int WC [5] = '{3, 5, 16, 1, 7};
  localparam int EC [5] = '{5, 9, 2, 12, 7};
  localparam int WD [3] = '{-3, 4, -1};
  localparam int ED [3] = '{300, 20, 100};
  localparam int BD [3] = '{10, 6, 8};

  logic [3:0]  a4 [4];
  logic [3:0]  a5 [5];
  logic [9:0]  a3 [3];
  logic [23:0] ya, yb, yc, yd;

  ax_neuron #(.N_IN(4), .A_W(4), .W(WA), .BIAS(0), .E(EA), .G_NUM(1), .G_DEN(4),
              .K(2), .RELU(1'b1), .Y_W(24)) dut_a (.a(a4), .y(ya));
  ax_neuron #(.N_IN(4), .A_W(4), .W(WA), .BIAS(0), .E(EA), .G_NUM(1), .G_DEN(4),
              .K(2), .RELU(1'b0), .Y_W(24)) dut_b (.a(a4), .y(yb));
  ax_neuron #(.N_IN(5), .A_W(4), .W(WC), .BIAS(5), .E(EC), .G_NUM(1), .G_DEN(4),
              .K(1), .RELU(1'b1), .Y_W(24)) dut_c (.a(a5), .y(yc));
  ax_neuron #(.N_IN(3), .A_W(10), .A_BITS(BD), .W(WD), .BIAS(-20), .E(ED),
              .G_NUM(1), .G_DEN(2), .K(3), .RELU(1'b0), .Y_W(24)) dut_d (.a(a3), .y(yd));

  task automatic check(string name, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", name, got, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int     w[], e[], ab[];
    longint a[];
    bit     ax[];
    longint r;
    for (int it = 0; it < 3000; it++) begin
      foreach (a4[i]) a4[i] = 4'($urandom);
      foreach (a5[i]) a5[i] = 4'($urandom);
      foreach (a3[i]) a3[i] = 10'($urandom_range(0, (1 << BD[i]) - 1));
      #1;
      // A and B
      w = new[4]; e = new[4]; a = new[4]; ab = new[4];
      foreach (w[i]) begin w[i] = WA[i]; e[i] = EA[i]; a[i] = a4[i]; ab[i] = 4; end
      sig_flags(w, e, 1, 4, ax);
      r = neuron(w, 0, a, ab, ax, 2, 1'b1, lossy, clamped);
      check("A", longint'(ya), r);
      r = neuron(w, 0, a, ab, ax, 2, 1'b0, lossy, clamped);
      check("B", longint'(signed'(yb)), r);
      // C
      w = new[5]; e = new[5]; a = new[5]; ab = new[5];
      foreach (w[i]) begin w[i] = WC[i]; e[i] = EC[i]; a[i] = a5[i]; ab[i] = 4; end
      sig_flags(w, e, 1, 4, ax);
      r = neuron(w, 5, a, ab, ax, 1, 1'b1, lossy, clamped);
      check("C", longint'(yc), r);
      // D
      w = new[3]; e = new[3]; a = new[3]; ab = new[3];
      foreach (w[i]) begin w[i] = WD[i]; e[i] = ED[i]; a[i] = a3[i]; ab[i] = BD[i]; end
      sig_flags(w, e, 1, 2, ax);
      r = neuron(w, -20, a, ab, ax, 3, 1'b0, lossy, clamped);
      check("D", longint'(signed'(yd)), r);
    end
    $display("approximated products that lost bits: %0d, ReLU clamps: %0d", lossy, clamped);
    checks += 2;
    if (lossy == 0)   failures++;
    if (clamped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
