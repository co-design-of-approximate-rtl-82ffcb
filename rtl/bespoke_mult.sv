// bespoke_mult: multiplier by a hardwired non-negative constant.
//
// In a bespoke printed circuit every coefficient is fixed at fabrication, so a
// product a*|w| needs no general multiplier: it is the sum of the input shifted
// to each set bit of |w|. A power of two becomes pure wiring, a value with two
// set bits one adder, and so on; this is why the paper's retraining favours
// powers of two. The product is unsigned and exactly P_W = A_W + bits(|w|)
// wide, the size n_i the paper uses when it truncates summands.
//
// Interface: a (A_W bits, unsigned) in, p (P_W bits) out. Purely
// combinational, no clock. Negative coefficients are handled by the neuron,
// which feeds |w| here and routes the product to its negative adder tree.
module bespoke_mult
  import ax_mlp_pkg::*;
#(
  parameter int A_W  = 4,   // input width
  parameter int WABS = 3,   // hardwired coefficient magnitude, >= 0
  localparam int P_W = A_W + mag_bits(longint'(WABS))
) (
  input  logic [A_W-1:0] a,
  output logic [P_W-1:0] p
);

  localparam int WB = mag_bits(longint'(WABS));

  always_comb begin
    p = '0;
    for (int b = 0; b < WB; b++) begin
      if (WABS[b]) p = p + (P_W'(a) << b);
    end
  end

endmodule
