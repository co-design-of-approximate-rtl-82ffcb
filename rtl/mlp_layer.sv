// mlp_layer: one fully-parallel layer of approximate bespoke neurons.
//
// N_OUT ax_neuron instances share the same N_IN inputs. Each gets its row of
// the hardwired coefficient matrix and its bias. As in the paper, the whole
// layer uses one significance threshold G (G_NUM/G_DEN) and the network one
// K; the input means E are those of this layer's inputs. RELU selects a
// hidden layer (ReLU outputs) or an output layer (raw signed values for the
// argmax; not activated, this design's choice).
//
// Interface: a[N_IN] (A_W bits, low A_BITS[i] used) in, y[N_OUT] (Y_W bits)
// out. Purely combinational: the paper's circuits compute one inference per
// clock cycle.
module mlp_layer #(
  parameter int N_IN              = 4,
  parameter int N_OUT             = 2,
  parameter int A_W               = 4,
  parameter int A_BITS [N_IN]     = '{default: 4},
  parameter int W [N_OUT][N_IN]   = '{'{8, -2, 1, -16}, '{-1, 4, 32, 2}},
  parameter int B [N_OUT]         = '{0, -8},
  parameter int E [N_IN]          = '{default: 8},
  parameter int G_NUM             = 1,
  parameter int G_DEN             = 16,
  parameter int K                 = 2,
  parameter bit RELU              = 1'b1,
  parameter int Y_W               = 12
) (
  input  logic [A_W-1:0] a [N_IN],
  output logic [Y_W-1:0] y [N_OUT]
);

  typedef int row_t [N_IN];

  // Row j of the coefficient matrix, as a parameter value of its own.
  function automatic row_t coef_row(int j);
    row_t r;
    for (int i = 0; i < N_IN; i++) r[i] = W[j][i];
    return r;
  endfunction

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    localparam row_t W_ROW = coef_row(j);
    ax_neuron #(
      .N_IN(N_IN), .A_W(A_W), .A_BITS(A_BITS), .W(W_ROW), .BIAS(B[j]),
      .E(E), .G_NUM(G_NUM), .G_DEN(G_DEN), .K(K), .RELU(RELU), .Y_W(Y_W)
    ) u_neuron (
      .a (a),
      .y (y[j])
    );
  end

endmodule
