// argmax: index of the largest of N signed values.
//
// Turns the output-layer neuron values into the predicted class. The scan
// keeps the first maximum, so on a tie the lowest index wins (this design's
// choice; the paper only names an argmax). Purely combinational.
//
// Interface: d[N] (D_W-bit two's complement) in, idx (IDX_W bits) out.
module argmax #(
  parameter int  N     = 10,
  parameter int  D_W   = 16,
  localparam int IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [D_W-1:0] d [N],
  output logic [IDX_W-1:0]      idx
);

  logic signed [D_W-1:0] best;

  always_comb begin
    best = d[0];
    idx  = '0;
    for (int i = 1; i < N; i++) begin
      if (d[i] > best) begin
        best = d[i];
        idx  = IDX_W'(i);
      end
    end
  end

endmodule
