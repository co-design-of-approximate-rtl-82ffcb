// ax_mlp_pkg: shared constants, width helpers and the default network of the
// bespoke approximate MLP.
//
// Number formats follow the paper: classifier inputs are unsigned 4-bit
// fixed-point values (features normalised to [0,1]), coefficients are signed
// integers of at most 8 bits ([-128,127]), each hardwired with only the bits
// its magnitude needs.
//
// The default network has the Pendigits topology the paper evaluates
// (16 inputs, 5 hidden ReLU neurons, 10 classes, 130 products). The paper
// does not publish trained coefficients, so the default weights, biases and
// input means below are illustrative values of this design, chosen in the
// style of a printing-friendly retrained model: mostly signed powers of two
// (cluster C0, multiplier reduced to wiring) plus a few other small values.
// Replace them with a trained model's integers to get a real classifier.
package ax_mlp_pkg;

  // Input feature width (paper: "4 bits for the inputs").
  localparam int IN_W   = 4;
  // Largest coefficient width (paper: "8 bits for coefficients").
  localparam int COEF_W = 8;

  // Bits needed to hold the non-negative value v (at least 1).
  function automatic int mag_bits(longint v);
    int b;
    b = 1;
    while (b < 62 && (longint'(1) << b) <= v) b++;
    return b;
  endfunction

  function automatic longint abs_l(longint v);
    return (v < 0) ? -v : v;
  endfunction

  // ---------------------------------------------------------------------
  // Default network (Pendigits topology 16-5-10), illustrative values.
  // ---------------------------------------------------------------------
  localparam int PD_N_IN  = 16;
  localparam int PD_N_HID = 5;
  localparam int PD_N_OUT = 10;

  localparam int PD_W1 [PD_N_HID][PD_N_IN] = '{
    '{  8, -4,  16,   0, -2, 32,   1,  -8,   4, -16,  2,  64, -1,   8, -32,  3},
    '{-16,  2,  -8,   4, 12, -1,  32, -64,   8,   2, -4,   1, 16,  -2,   0,  6},
    '{  4, 32,  -2, -16,  1,  8,  -8,   2, -32,  16,  5,  -4, 64,   1,  -2,  8},
    '{ -2, -8,  64,   1, 16, -4,   2,  32,  -1,  -8,  4,  16, -16, 24,   8, -4},
    '{  1, 16, -32,   8, -2, 64, -16,   4,   2,  -1, 32,  -8,  4, -64,  16,  3}
  };
  localparam int PD_B1 [PD_N_HID] = '{16, -8, 4, -32, 8};

  localparam int PD_W2 [PD_N_OUT][PD_N_HID] = '{
    '{ 4,  -2,  8,  -1,   2},
    '{-8,   4, -1,   2,  16},
    '{ 2,   8, -4,  16,  -1},
    '{16,  -1,  2,  -8,   4},
    '{-1,   2, 16,   4,  -8},
    '{ 8,  16, -2,  -4,   1},
    '{-4,   1,  4,   8, -16},
    '{ 1, -16,  8,   2,   4},
    '{ 2,   4, -8, -16,   8},
    '{-2,   8,  1,   4,  -4}
  };
  localparam int PD_B2 [PD_N_OUT] = '{0, 16, -16, 32, -8, 8, -32, 64, -64, 4};

  // Mean value E[a_i] of each neuron input, as recorded on the training set,
  // in units of that input's LSB. Used only at elaboration, to rank the
  // significance of each product (Eq. G_i of the paper).
  localparam int PD_E1 [PD_N_IN]  = '{8, 7, 9, 6, 8, 10, 5, 8, 7, 9, 8, 6, 10, 7, 8, 9};
  localparam int PD_E2 [PD_N_HID] = '{200, 150, 300, 120, 250};

endpackage
