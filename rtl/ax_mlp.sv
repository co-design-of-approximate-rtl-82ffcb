// ax_mlp: bespoke approximate two-layer MLP classifier (top level).
//
// A fully-parallel printed-style classifier: every coefficient is hardwired,
// every product has its own constant multiplier and the whole network settles
// combinationally, so one inference completes per clock cycle. The datapath
// is input features -> hidden layer of ReLU neurons -> output layer -> argmax.
// All neurons are the approximate bespoke neurons of ax_neuron (split
// positive/negative adder trees, ones' complement, K-MSB truncation of
// low-significance products). Only the registers around the network are this
// design's own: the paper treats the classifier as one combinational stage
// clocked once per inference.
//
// Timing: x is captured when in_valid is high at a rising clock edge; the
// network evaluates during the following cycle and out_class / out_valid are
// registered at the next edge. Latency is 1 cycle from capture to result,
// throughput one inference per cycle. When in_valid is low the input register
// holds, so the network does not toggle. rst_n is an asynchronous, active-low
// reset that clears the valid flags and both registers.
//
// Sizes: IN_W-bit unsigned inputs (4 in the paper); hidden activation widths
// and output value widths are derived from the coefficients, bespoke style,
// so each is just wide enough for its largest possible value.
module ax_mlp #(
  parameter int N_IN                 = ax_mlp_pkg::PD_N_IN,
  parameter int N_HID                = ax_mlp_pkg::PD_N_HID,
  parameter int N_OUT                = ax_mlp_pkg::PD_N_OUT,
  parameter int IN_W                 = ax_mlp_pkg::IN_W,
  parameter int W1 [N_HID][N_IN]     = ax_mlp_pkg::PD_W1,
  parameter int B1 [N_HID]           = ax_mlp_pkg::PD_B1,
  parameter int W2 [N_OUT][N_HID]    = ax_mlp_pkg::PD_W2,
  parameter int B2 [N_OUT]           = ax_mlp_pkg::PD_B2,
  parameter int E1 [N_IN]            = ax_mlp_pkg::PD_E1,   // mean of each input feature
  parameter int E2 [N_HID]           = ax_mlp_pkg::PD_E2,   // mean of each hidden activation
  parameter int K                    = 2,       // MSBs kept of approximated products
  parameter int G1_NUM               = 1,       // hidden-layer threshold G1 = G1_NUM/G1_DEN
  parameter int G1_DEN               = 16,
  parameter int G2_NUM               = 1,       // output-layer threshold G2 = G2_NUM/G2_DEN
  parameter int G2_DEN               = 16,
  localparam int CLS_W               = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  x [N_IN],
  output logic             out_valid,
  output logic [CLS_W-1:0] out_class
);

  typedef int hid_arr_t [N_HID];
  typedef int in_arr_t  [N_IN];

  // Width of each hidden activation: the bits of the largest positive sum
  // of its neuron (ReLU output never exceeds it).
  function automatic hid_arr_t hidden_bits();
    hid_arr_t hb;
    longint   sp;
    for (int j = 0; j < N_HID; j++) begin
      sp = (B1[j] > 0) ? longint'(B1[j]) : 0;
      for (int i = 0; i < N_IN; i++)
        if (W1[j][i] > 0) sp += ((longint'(1) << IN_W) - 1) * longint'(W1[j][i]);
      hb[j] = ax_mlp_pkg::mag_bits(sp);
    end
    return hb;
  endfunction

  localparam hid_arr_t H_BITS = hidden_bits();

  function automatic int max_hidden_bits();
    int m;
    m = 1;
    for (int j = 0; j < N_HID; j++) if (H_BITS[j] > m) m = H_BITS[j];
    return m;
  endfunction

  // Width of the output-layer values: largest S' width of an output neuron.
  function automatic int out_width();
    int     m, w;
    longint sp, sn;
    m = 2;
    for (int j = 0; j < N_OUT; j++) begin
      sp = (B2[j] > 0) ? longint'(B2[j])  : 0;
      sn = (B2[j] < 0) ? -longint'(B2[j]) : 0;
      for (int i = 0; i < N_HID; i++) begin
        if (W2[j][i] > 0) sp += ((longint'(1) << H_BITS[i]) - 1) * longint'(W2[j][i]);
        if (W2[j][i] < 0) sn += ((longint'(1) << H_BITS[i]) - 1) * -longint'(W2[j][i]);
      end
      w = ((ax_mlp_pkg::mag_bits(sp) > ax_mlp_pkg::mag_bits(sn)) ? ax_mlp_pkg::mag_bits(sp) : ax_mlp_pkg::mag_bits(sn)) + 1;
      if (w > m) m = w;
    end
    return m;
  endfunction

  localparam int      H_W       = max_hidden_bits();
  localparam int      O_W       = out_width();
  localparam in_arr_t IN_BITS   = '{default: IN_W};

  // ---------------------------------------------------------------------
  // Input register
  // ---------------------------------------------------------------------
  logic [IN_W-1:0] x_q [N_IN];
  logic            v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      for (int i = 0; i < N_IN; i++) x_q[i] <= '0;
    end else begin
      v_q <= in_valid;
      if (in_valid) x_q <= x;
    end
  end

  // ---------------------------------------------------------------------
  // Network: hidden layer (ReLU), output layer (raw), argmax
  // ---------------------------------------------------------------------
  logic [H_W-1:0]        h     [N_HID];
  logic [O_W-1:0]        o_raw [N_OUT];
  logic signed [O_W-1:0] o_val [N_OUT];
  logic [CLS_W-1:0]      cls;

  mlp_layer #(
    .N_IN(N_IN), .N_OUT(N_HID), .A_W(IN_W), .A_BITS(IN_BITS),
    .W(W1), .B(B1), .E(E1), .G_NUM(G1_NUM), .G_DEN(G1_DEN), .K(K),
    .RELU(1'b1), .Y_W(H_W)
  ) u_hidden (
    .a (x_q),
    .y (h)
  );

  mlp_layer #(
    .N_IN(N_HID), .N_OUT(N_OUT), .A_W(H_W), .A_BITS(H_BITS),
    .W(W2), .B(B2), .E(E2), .G_NUM(G2_NUM), .G_DEN(G2_DEN), .K(K),
    .RELU(1'b0), .Y_W(O_W)
  ) u_output (
    .a (h),
    .y (o_raw)
  );

  always_comb begin
    for (int j = 0; j < N_OUT; j++) o_val[j] = signed'(o_raw[j]);
  end

  argmax #(.N(N_OUT), .D_W(O_W)) u_argmax (
    .d   (o_val),
    .idx (cls)
  );

  // ---------------------------------------------------------------------
  // Output register
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_class <= '0;
    end else begin
      out_valid <= v_q;
      if (v_q) out_class <= cls;
    end
  end

endmodule
