// tb_mlp_layer: random check of two layers against the reference model.
//   hidden-style: 6 inputs of 4 bits, 3 ReLU neurons, G = 1/8, K = 2
//   output-style: the same inputs, 4 neurons with raw signed outputs, K = 1
// Every neuron of each layer is compared; the rows and biases differ so that
// a neuron wired to the wrong row or bias is caught.
module tb_mlp_layer;
  import ax_ref_pkg::*;
  int checks = 0, failures = 0, lossy = 0, clamped = 0;

  localparam int WH [3][6] = '{'{4, -1, 2, 8, -16, 1},
                               '{-8, 3, 16, -2, 1, 32},
                               '{1, 1, -4, -64, 2, 6}};
  localparam int BH [3]    = '{-6, 12, 40};
  localparam int WO [4][6] = '{'{-2, 4, 8, 1, -1, 2},
                               '{16, -8, 1, 2, 4, -32},
                               '{3, 0, -5, 12, 2, 1},
                               '{-1, -1, -1, 64, 8, 2}};
  localparam int BO [4]    = '{0, -30, 17, -3};
  localparam int EL [6]    = '{7, 9, 4, 11, 8, 6};

  logic [3:0]  a  [6];
  logic [15:0] yh [3];
  logic [15:0] yo [4];

  mlp_layer #(.N_IN(6), .N_OUT(3), .A_W(4), .W(WH), .B(BH), .E(EL), .G_NUM(1), .G_DEN(8),
              .K(2), .RELU(1'b1), .Y_W(16)) dut_h (.a(a), .y(yh));
  mlp_layer #(.N_IN(6), .N_OUT(4), .A_W(4), .W(WO), .B(BO), .E(EL), .G_NUM(1), .G_DEN(8),
              .K(1), .RELU(1'b0), .Y_W(16)) dut_o (.a(a), .y(yo));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int     w[], e[], ab[];
    longint av[];
    bit     ax[];
    longint r;
    w = new[6]; e = new[6]; ab = new[6]; av = new[6];
    foreach (e[i]) begin e[i] = EL[i]; ab[i] = 4; end
    for (int it = 0; it < 2000; it++) begin
      foreach (a[i]) a[i] = 4'($urandom);
      #1;
      foreach (av[i]) av[i] = a[i];
      for (int j = 0; j < 3; j++) begin
        foreach (w[i]) w[i] = WH[j][i];
        sig_flags(w, e, 1, 8, ax);
        r = neuron(w, BH[j], av, ab, ax, 2, 1'b1, lossy, clamped);
        checks++;
        if (longint'(yh[j]) != r) begin
          failures++;
          $display("FAIL hidden %0d got %0d exp %0d", j, yh[j], r);
        end
      end
      for (int j = 0; j < 4; j++) begin
        foreach (w[i]) w[i] = WO[j][i];
        sig_flags(w, e, 1, 8, ax);
        r = neuron(w, BO[j], av, ab, ax, 1, 1'b0, lossy, clamped);
        checks++;
        if (longint'(signed'(yo[j])) != r) begin
          failures++;
          $display("FAIL output %0d got %0d exp %0d", j, signed'(yo[j]), r);
        end
      end
    end
    $display("approximated products that lost bits: %0d, ReLU clamps: %0d", lossy, clamped);
    checks += 2;
    if (lossy == 0)   failures++;
    if (clamped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
