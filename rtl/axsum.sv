// axsum: approximate multi-operand adder ("AxSum") of one sign of a neuron.
//
// It adds N unsigned products and a hardwired non-negative constant (the bias,
// when it has this sign). Products whose significance is at or below the
// layer threshold (AX[i] = 1) are approximated as in the paper: of the n_i-bit
// product only its k most significant bits p[n_i-1 : n_i-k] are kept, in place,
// and the lower n_i-k bits are dropped, so the adder needs no cells for them.
// Products with AX[i] = 0 are added exactly. When K >= n_i nothing is dropped.
//
// Which operands are approximated is decided when the neuron is elaborated
// (see ax_neuron); this block only applies the masks. The adder itself is
// written as a plain sum and left to synthesis to build as a tree.
//
// Interface: p[N] (OPW bits each, bits at and above NB[i] must be zero) in,
// s (SUM_W bits) out. SUM_W must hold the largest possible sum; the caller
// sizes it. Purely combinational.
module axsum
  import ax_mlp_pkg::*;
#(
  parameter int     N     = 4,
  parameter int     OPW   = 8,                 // port width of every product
  parameter int     NB [N] = '{default: 8},    // true size n_i of product i
  parameter bit     AX [N] = '{default: 1'b0}, // 1: keep only K MSBs of product i
  parameter int     K     = 2,                 // MSBs kept, paper: k in [1,3]
  parameter longint BIAS  = 0,                 // hardwired addend, >= 0
  parameter int     SUM_W = 11
) (
  input  logic [OPW-1:0]   p [N],
  output logic [SUM_W-1:0] s
);

  typedef logic [OPW-1:0] mask_t [N];

  // Keep-mask of every operand: bits [n_i-1 : n_i-k] when approximated,
  // bits [n_i-1 : 0] otherwise.
  function automatic mask_t make_masks();
    mask_t m;
    logic [OPW-1:0] mi;
    for (int i = 0; i < N; i++) begin
      mi = '0;
      for (int b = 0; b < OPW; b++) begin
        if (b < NB[i] && (!AX[i] || b >= NB[i] - K)) mi[b] = 1'b1;
      end
      m[i] = mi;
    end
    return m;
  endfunction

  localparam mask_t MASK = make_masks();

  always_comb begin
    s = SUM_W'(BIAS);
    for (int i = 0; i < N; i++) s = s + SUM_W'(p[i] & MASK[i]);
  end

endmodule
