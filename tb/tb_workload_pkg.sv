// tb_workload_pkg: test networks with the topologies of the ten reference
// benchmarks (inputs, hidden, outputs). The values are not trained models.
// They are drawn from the sequence s <- (1103515245*s + 12345) mod 2^31 and
// shaped like a retrained model:
//   - weights: m = (s>>8) mod 100. If m < 70, the weight is +-2^((s>>12) mod 7),
//     negative when bit 4 of s is set. If m < 85, it is ((s>>16) mod 255) - 127.
//     Otherwise it is 0.
//   - biases: ((s>>8) mod 129) - 64.
//   - input means: 3 + ((s>>8) mod 10).
//   - hidden means: 50 + ((s>>8) mod 350).
// Each network g = 1..10 uses its own seeds: 7919g+1 (W1), 104729g+3 (W2),
// 31g+5 (B1), 37g+11 (B2), 53g+13 (E1) and 59g+17 (E2).
package tb_workload_pkg;
  // WW: (11,4,7)
  localparam int WW_W1 [4][11] = '{'{0, 1, 0, -64, 4, -1, 16, 32, 16, 38, 4}, '{-32, -8, -1, 16, 27, -8, -32, -4, 64, 0, -30}, '{-8, -32, -8, -32, -8, 1, 16, 16, -4, -1, 16}, '{1, 0, 0, 6, -1, 29, 1, 64, 1, 4, -64}};
  localparam int WW_B1 [4] = '{47, -29, -19, -41};
  localparam int WW_W2 [7][4] = '{'{0, 61, 1, -34}, '{16, 4, 32, 0}, '{-1, -103, 0, 8}, '{0, -32, -35, 16}, '{-32, 64, 0, -4}, '{-64, 19, -77, 1}, '{32, 16, -2, -64}};
  localparam int WW_B2 [7] = '{25, -33, 19, -48, 0, -26, 58};
  localparam int WW_E1 [11] = '{11, 12, 5, 9, 7, 3, 9, 4, 7, 9, 10};
  localparam int WW_E2 [4] = '{374, 293, 109, 255};
  // CA: (21,3,3)
  localparam int CA_W1 [3][21] = '{'{2, -1, 1, -2, -64, -4, 0, -4, 8, 1, 64, -8, 55, 64, 8, 64, 0, -123, 0, 16, 8}, '{16, 64, 8, -16, -16, 0, 120, 8, -4, -16, -8, 64, -64, 27, -2, -64, -103, 0, -8, 4, 2}, '{0, 107, -1, 16, 64, 32, -64, 2, -16, 16, -41, 64, 1, 0, -64, 13, -105, -82, 32, 17, -34}};
  localparam int CA_B1 [3] = '{3, -6, 16};
  localparam int CA_W2 [3][3] = '{'{32, -32, 0}, '{-4, -111, -1}, '{1, 16, 32}};
  localparam int CA_B2 [3] = '{35, 53, -56};
  localparam int CA_E1 [21] = '{7, 4, 7, 12, 10, 10, 11, 6, 9, 4, 4, 12, 11, 3, 6, 10, 10, 6, 4, 4, 3};
  localparam int CA_E2 [3] = '{213, 395, 143};
  // RW: (11,2,6)
  localparam int RW_W1 [2][11] = '{'{8, -8, 8, -8, 16, 16, 32, 64, -28, 99, -4}, '{-16, 0, 0, -4, -16, -32, 2, -8, 0, -32, -64}};
  localparam int RW_B1 [2] = '{-41, 18};
  localparam int RW_W2 [6][2] = '{'{16, 120}, '{0, -64}, '{0, 64}, '{8, 4}, '{66, -113}, '{-4, -2}};
  localparam int RW_B2 [6] = '{45, 14, -1, 3, 22, -22};
  localparam int RW_E1 [11] = '{12, 8, 8, 6, 10, 6, 5, 8, 9, 8, 9};
  localparam int RW_E2 [2] = '{52, 340};
  // PD: (16,5,10)
  localparam int PD_W1 [5][16] = '{'{-18, 8, 113, -32, -12, -16, 64, -1, 2, -32, -8, -8, -1, -4, 8, 8}, '{64, -2, -16, 64, 16, 64, 39, 4, -13, 2, 32, 2, 16, 4, -32, -16}, '{0, 0, 8, -8, -117, 125, 2, -1, 0, -32, 91, -8, 116, -2, 1, 1}, '{4, 30, 118, 64, 0, 0, -64, 2, 0, 64, 42, 0, -7, 64, -64, -32}, '{-2, 16, 4, -16, -16, -8, -123, -93, -30, -1, -2, -4, 0, -2, 1, 0}};
  localparam int PD_B1 [5] = '{45, 42, -43, 42, 3};
  localparam int PD_W2 [10][5] = '{'{0, -32, 115, 4, 32}, '{-16, -1, -4, 16, -8}, '{0, -8, 0, -53, 0}, '{0, 4, 32, -41, -4}, '{-2, 0, 2, 64, -64}, '{0, -1, 1, 0, 67}, '{0, 1, -1, -16, -2}, '{2, 1, -64, -64, -1}, '{32, -2, 0, -1, -64}, '{0, -16, -2, 16, 64}};
  localparam int PD_B2 [10] = '{54, -29, 53, 28, 32, -22, 46, -22, -32, 9};
  localparam int PD_E1 [16] = '{7, 9, 11, 11, 3, 11, 7, 10, 10, 12, 5, 8, 12, 3, 8, 11};
  localparam int PD_E2 [5] = '{83, 284, 52, 71, 223};
  // V3: (6,3,3)
  localparam int V3_W1 [3][6] = '{'{-1, 32, 0, -1, -2, -64}, '{-16, 0, 2, 16, -1, -2}, '{8, 4, 4, -2, 2, 0}};
  localparam int V3_B1 [3] = '{1, -63, -9};
  localparam int V3_W2 [3][3] = '{'{-8, -16, -16}, '{64, -4, 8}, '{87, 0, -16}};
  localparam int V3_B2 [3] = '{64, 57, -18};
  localparam int V3_E1 [6] = '{11, 3, 3, 3, 4, 7};
  localparam int V3_E2 [3] = '{273, 228, 86};
  // BS: (4,3,3)
  localparam int BS_W1 [3][4] = '{'{-1, -64, -16, -4}, '{32, 2, 0, 0}, '{0, 8, 63, 1}};
  localparam int BS_B1 [3] = '{-43, -36, 30};
  localparam int BS_W2 [3][3] = '{'{-16, -64, 4}, '{0, 1, -2}, '{0, -1, 0}};
  localparam int BS_B2 [3] = '{-55, 15, 36};
  localparam int BS_E1 [4] = '{8, 5, 4, 8};
  localparam int BS_E2 [3] = '{112, 330, 120};
  // SE: (7,3,3)
  localparam int SE_W1 [3][7] = '{'{-38, -66, -32, -16, -4, 8, 32}, '{0, -1, -4, 0, 64, 32, 0}, '{2, -32, 0, 16, 18, 32, 32}};
  localparam int SE_B1 [3] = '{42, -12, -64};
  localparam int SE_W2 [3][3] = '{'{0, 32, -2}, '{-1, -4, 1}, '{-2, 64, -16}};
  localparam int SE_B2 [3] = '{-45, -24, -39};
  localparam int SE_E1 [7] = '{12, 8, 6, 10, 7, 11, 5};
  localparam int SE_E2 [3] = '{301, 274, 153};
  // BC: (9,3,2)
  localparam int BC_W1 [3][9] = '{'{-8, 104, 56, -64, 0, -32, -16, -4, -109}, '{-64, 2, 1, 0, -16, -4, 32, 32, 0}, '{-64, 16, -32, 8, 32, 4, 1, 64, -32}};
  localparam int BC_B1 [3] = '{-2, 12, -29};
  localparam int BC_W2 [2][3] = '{'{16, 64, 1}, '{59, -91, -32}};
  localparam int BC_B2 [2] = '{-36, 62};
  localparam int BC_E1 [9] = '{7, 12, 7, 5, 10, 5, 7, 9, 3};
  localparam int BC_E2 [3] = '{332, 219, 379};
  // V2: (6,3,2)
  localparam int V2_W1 [3][6] = '{'{8, -109, 16, -2, -64, -16}, '{16, 64, -32, -32, -32, 32}, '{0, 64, -40, -4, -64, -1}};
  localparam int V2_B1 [3] = '{-49, 35, 6};
  localparam int V2_W2 [2][3] = '{'{8, 64, 0}, '{-64, 0, 16}};
  localparam int V2_B2 [2] = '{-26, 19};
  localparam int V2_E1 [6] = '{11, 4, 11, 7, 12, 12};
  localparam int V2_E2 [3] = '{171, 321, 63};
  // MA: (5,3,2)
  localparam int MA_W1 [3][5] = '{'{32, 0, 64, -4, -16}, '{64, 0, 8, -32, 16}, '{-2, 16, 4, 15, 1}};
  localparam int MA_B1 [3] = '{36, 59, 41};
  localparam int MA_W2 [2][3] = '{'{0, 32, 40}, '{-8, -32, -16}};
  localparam int MA_B2 [2] = '{-16, -24};
  localparam int MA_E1 [5] = '{8, 8, 12, 12, 3};
  localparam int MA_E2 [3] = '{360, 265, 97};
endpackage
