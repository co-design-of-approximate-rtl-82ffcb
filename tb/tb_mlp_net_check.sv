// tb_mlp_net_check: builds one ax_mlp of a given topology and checks it.
//
// Coefficients, biases, input means and K are parameters; the thresholds are
// G = 1/10 in both layers. NV
// random vectors are streamed back-to-back and every class is compared with
// the reference model of ax_ref_pkg one cycle after capture. Results are
// reported through the checks/failures outputs; done rises at the end.
module tb_mlp_net_check #(
  parameter int NI   = 5,
  parameter int NH   = 3,
  parameter int NO   = 2,
  parameter int KK   = 2,
  parameter int NV   = 300,
  parameter int W1 [NH][NI] = '{default: 1},
  parameter int B1 [NH]     = '{default: 0},
  parameter int W2 [NO][NH] = '{default: 1},
  parameter int B2 [NO]     = '{default: 0},
  parameter int E1 [NI]     = '{default: 8},
  parameter int E2 [NH]     = '{default: 100}
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import ax_ref_pkg::*;

  localparam int CW = (NO > 1) ? $clog2(NO) : 1;

  logic          in_valid;
  logic [3:0]    x [NI];
  logic          out_valid;
  logic [CW-1:0] out_class;

  ax_mlp #(
    .N_IN(NI), .N_HID(NH), .N_OUT(NO), .W1(W1), .B1(B1), .W2(W2), .B2(B2),
    .E1(E1), .E2(E2), .K(KK), .G1_NUM(1), .G1_DEN(10), .G2_NUM(1), .G2_DEN(10)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .out_class(out_class)
  );

  int lossy = 0, clamped = 0;

  function automatic int ref_class(input logic [3:0] xv [NI]);
    int     w[], e[], ab[];
    longint a[], hid[], o[];
    bit     ax[];
    longint sp;
    hid = new[NH]; o = new[NO];
    w = new[NI]; e = new[NI]; ab = new[NI]; a = new[NI];
    foreach (a[i]) begin a[i] = xv[i]; e[i] = E1[i]; ab[i] = 4; end
    for (int j = 0; j < NH; j++) begin
      foreach (w[i]) w[i] = W1[j][i];
      sig_flags(w, e, 1, 10, ax);
      hid[j] = neuron(w, B1[j], a, ab, ax, KK, 1'b1, lossy, clamped);
    end
    w = new[NH]; e = new[NH]; ab = new[NH]; a = new[NH];
    for (int j = 0; j < NH; j++) begin
      sp = (B1[j] > 0) ? B1[j] : 0;
      for (int i = 0; i < NI; i++) if (W1[j][i] > 0) sp += 15 * W1[j][i];
      ab[j] = bits_of(sp);
      a[j]  = hid[j];
      e[j]  = E2[j];
    end
    for (int j = 0; j < NO; j++) begin
      foreach (w[i]) w[i] = W2[j][i];
      sig_flags(w, e, 1, 10, ax);
      o[j] = neuron(w, B2[j], a, ab, ax, KK, 1'b0, lossy, clamped);
    end
    return argmax(o);
  endfunction

  initial begin
    int exp_cls;
    bit prev_v;
    checks   = 0;
    failures = 0;
    done     = 1'b0;
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    @(posedge rst_n);
    prev_v  = 1'b0;
    exp_cls = 0;
    for (int n = 0; n <= NV; n++) begin
      @(negedge clk);
      in_valid = (n < NV);
      foreach (x[i]) x[i] = 4'($urandom);
      @(posedge clk);
      #1;
      if (prev_v) begin
        checks++;
        if (!out_valid || int'(out_class) != exp_cls) begin
          failures++;
          $display("FAIL net %0d-%0d-%0d: class %0d exp %0d", NI, NH, NO, out_class, exp_cls);
        end
      end
      if (in_valid) begin
        logic [3:0] xs [NI];
        xs      = x;
        exp_cls = ref_class(xs);
      end
      prev_v = in_valid;
    end
    $display("net %0d-%0d-%0d k=%0d: %0d checks, %0d failures, %0d lossy products, %0d ReLU clamps",
             NI, NH, NO, KK, checks, failures, lossy, clamped);
    done = 1'b1;
  end
endmodule
