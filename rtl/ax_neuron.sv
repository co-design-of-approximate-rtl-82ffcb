// ax_neuron: approximate bespoke neuron.
//
// Computes S' = Sp + (~Sn) and, for hidden neurons, ReLU(S'). Since every
// neuron input is non-negative, the sign of each product is the sign of its
// hardwired coefficient. Products of positive coefficients (and a positive
// bias) are summed by one AxSum into Sp; products of |w| for negative
// coefficients (and |bias| for a negative bias) by a second AxSum into Sn.
// Sn is then negated with a ones' complement (bitwise NOT) instead of a two's
// complement, which saves the +1 and all sign extension at the cost of a bias
// of -1 on the result. If the neuron has no negative coefficient and no
// negative bias the whole negative side, and the -1, is left out.
//
// Approximation: at elaboration each product gets a significance
//     G_i = | w_i * E[a_i] / sum_j(E[a_j] * w_j) |
// from the recorded input means E. Products with G_i <= G (G = G_NUM/G_DEN,
// one per layer) keep only their K MSBs inside the AxSum. When the mean dot
// product is zero no product is approximated (this design's choice).
//
// Widths: input i uses its low A_BITS[i] bits. Sp and Sn are sized for their
// largest possible value; S' is one bit wider than the larger of the two and
// is a two's complement number. y is ReLU(S') zero-extended (RELU = 1) or S'
// sign-extended (RELU = 0) to Y_W bits; with ReLU, Y_W may be as small as the
// width of Sp. Purely combinational.
module ax_neuron
  import ax_mlp_pkg::*;
#(
  parameter int N_IN          = 4,
  parameter int A_W           = 4,                      // port width of each input
  parameter int A_BITS [N_IN] = '{default: 4},          // used bits of each input
  parameter int W [N_IN]      = '{8, -2, 1, -16},       // hardwired coefficients
  parameter int BIAS          = 0,                      // hardwired bias
  parameter int E [N_IN]      = '{default: 8},          // input means, for G_i
  parameter int G_NUM         = 1,                      // threshold G = G_NUM/G_DEN
  parameter int G_DEN         = 16,
  parameter int K             = 2,                      // MSBs kept, k in [1,3]
  parameter bit RELU          = 1'b1,
  parameter int Y_W           = 12
) (
  input  logic [A_W-1:0] a [N_IN],
  output logic [Y_W-1:0] y
);

  typedef int  int_arr_t [N_IN];
  typedef bit  bit_arr_t [N_IN];

  // Largest value of the positive (neg = 0) or negative (neg = 1) sum.
  function automatic longint max_sum(bit neg);
    longint acc;
    acc = 0;
    for (int i = 0; i < N_IN; i++) begin
      if ((neg && W[i] < 0) || (!neg && W[i] > 0))
        acc += ((longint'(1) << A_BITS[i]) - 1) * abs_l(longint'(W[i]));
    end
    if ((neg && BIAS < 0) || (!neg && BIAS > 0)) acc += abs_l(longint'(BIAS));
    return acc;
  endfunction

  function automatic bit any_negative();
    bit n;
    n = (BIAS < 0);
    for (int i = 0; i < N_IN; i++) if (W[i] < 0) n = 1'b1;
    return n;
  endfunction

  // Product sizes n_i = size(|w_i|) + size(a_i).
  function automatic int_arr_t make_nb();
    int_arr_t nb;
    for (int i = 0; i < N_IN; i++) nb[i] = mag_bits(abs_l(longint'(W[i]))) + A_BITS[i];
    return nb;
  endfunction

  function automatic int max_nb();
    int m;
    m = 1;
    for (int i = 0; i < N_IN; i++)
      if (mag_bits(abs_l(longint'(W[i]))) + A_BITS[i] > m)
        m = mag_bits(abs_l(longint'(W[i]))) + A_BITS[i];
    return m;
  endfunction

  // Significance test G_i <= G for every product.
  function automatic bit_arr_t make_ax();
    bit_arr_t ax;
    longint dot;
    dot = 0;
    for (int i = 0; i < N_IN; i++) dot += longint'(E[i]) * longint'(W[i]);
    for (int i = 0; i < N_IN; i++)
      ax[i] = (dot != 0) && (W[i] != 0) &&
              (abs_l(longint'(W[i]) * longint'(E[i])) * longint'(G_DEN)
                 <= longint'(G_NUM) * abs_l(dot));
    return ax;
  endfunction

  localparam longint   SP_MAX  = max_sum(1'b0);
  localparam longint   SN_MAX  = max_sum(1'b1);
  localparam bit       HAS_NEG = any_negative();
  localparam int       SP_W    = mag_bits(SP_MAX);
  localparam int       SN_W    = mag_bits(SN_MAX);
  localparam int       S_W     = ((SP_W > SN_W) ? SP_W : SN_W) + 1;
  localparam int       YS_W    = (S_W > Y_W) ? S_W : Y_W;
  localparam int_arr_t NB      = make_nb();
  localparam bit_arr_t AX      = make_ax();
  localparam int       OPW     = max_nb();

  if (RELU ? (Y_W < SP_W) : (Y_W < S_W)) begin : g_width_check
    $error("ax_neuron: Y_W too small for this neuron");
  end

  // Coefficients are at most 8-bit signed, as in the paper.
  for (genvar i = 0; i < N_IN; i++) begin : g_coef_check
    if (W[i] < -128 || W[i] > 127) begin : g_bad
      $error("ax_neuron: coefficient outside [-128,127]");
    end
  end

  logic [OPW-1:0]  p_pos [N_IN];
  logic [OPW-1:0]  p_neg [N_IN];
  logic [SP_W-1:0] sp;
  logic [SN_W-1:0] sn;
  logic signed [S_W-1:0]  s;
  logic signed [YS_W-1:0] s_ext;

  // Bespoke multipliers, one per non-zero coefficient, fed |w|.
  for (genvar i = 0; i < N_IN; i++) begin : g_mul
    if (W[i] == 0) begin : g_zero
      assign p_pos[i] = '0;
      assign p_neg[i] = '0;
    end else begin : g_nz
      logic [NB[i]-1:0] prod;
      bespoke_mult #(.A_W(A_BITS[i]), .WABS(int'(abs_l(longint'(W[i]))))) u_mult (
        .a (a[i][A_BITS[i]-1:0]),
        .p (prod)
      );
      if (W[i] > 0) begin : g_pos
        assign p_pos[i] = OPW'(prod);
        assign p_neg[i] = '0;
      end else begin : g_neg
        assign p_pos[i] = '0;
        assign p_neg[i] = OPW'(prod);
      end
    end
  end

  axsum #(
    .N(N_IN), .OPW(OPW), .NB(NB), .AX(AX), .K(K),
    .BIAS((BIAS > 0) ? longint'(BIAS) : 64'sd0), .SUM_W(SP_W)
  ) u_sum_pos (
    .p (p_pos),
    .s (sp)
  );

  if (HAS_NEG) begin : g_negside
    axsum #(
      .N(N_IN), .OPW(OPW), .NB(NB), .AX(AX), .K(K),
      .BIAS((BIAS < 0) ? -longint'(BIAS) : 64'sd0), .SUM_W(SN_W)
    ) u_sum_neg (
      .p (p_neg),
      .s (sn)
    );
    // Ones' complement of Sn, then the final adder.
    assign s = signed'(S_W'(sp) + ~S_W'(sn));
  end else begin : g_posonly
    assign sn = '0;
    assign s  = signed'(S_W'(sp));
  end

  assign s_ext = YS_W'(s);

  always_comb begin
    if (RELU && s[S_W-1]) y = '0;
    else                  y = s_ext[Y_W-1:0];
  end

endmodule
