// tb_workloads: the ten benchmark topologies, each built as its own bespoke
// classifier with generated coefficients and checked against the reference
// model: WhiteWine (11,4,7), Cardio (21,3,3), RedWine (11,2,6), Pendigits
// (16,5,10), Vertebral 3C (6,3,3), Balance Scale (4,3,3), Seeds (7,3,3),
// Breast Cancer (9,3,2), Vertebral 2C (6,3,2), Mammographic (5,3,2).
// K cycles through 1, 2 and 3 across the networks.
module tb_workloads;
  import tb_workload_pkg::*;
  localparam int NNET = 10;
  localparam int NV   = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic done [NNET];
  int   nchecks [NNET], nfail [NNET];

  always #5 clk = ~clk;

  tb_mlp_net_check #(.NI(11), .NH(4), .NO(7), .KK(1), .NV(NV),
    .W1(WW_W1), .B1(WW_B1), .W2(WW_W2), .B2(WW_B2), .E1(WW_E1), .E2(WW_E2)
  ) u_ww (.clk(clk), .rst_n(rst_n), .done(done[0]), .checks(nchecks[0]), .failures(nfail[0]));
  tb_mlp_net_check #(.NI(21), .NH(3), .NO(3), .KK(2), .NV(NV),
    .W1(CA_W1), .B1(CA_B1), .W2(CA_W2), .B2(CA_B2), .E1(CA_E1), .E2(CA_E2)
  ) u_ca (.clk(clk), .rst_n(rst_n), .done(done[1]), .checks(nchecks[1]), .failures(nfail[1]));
  tb_mlp_net_check #(.NI(11), .NH(2), .NO(6), .KK(3), .NV(NV),
    .W1(RW_W1), .B1(RW_B1), .W2(RW_W2), .B2(RW_B2), .E1(RW_E1), .E2(RW_E2)
  ) u_rw (.clk(clk), .rst_n(rst_n), .done(done[2]), .checks(nchecks[2]), .failures(nfail[2]));
  tb_mlp_net_check #(.NI(16), .NH(5), .NO(10), .KK(1), .NV(NV),
    .W1(PD_W1), .B1(PD_B1), .W2(PD_W2), .B2(PD_B2), .E1(PD_E1), .E2(PD_E2)
  ) u_pd (.clk(clk), .rst_n(rst_n), .done(done[3]), .checks(nchecks[3]), .failures(nfail[3]));
  tb_mlp_net_check #(.NI(6), .NH(3), .NO(3), .KK(2), .NV(NV),
    .W1(V3_W1), .B1(V3_B1), .W2(V3_W2), .B2(V3_B2), .E1(V3_E1), .E2(V3_E2)
  ) u_v3 (.clk(clk), .rst_n(rst_n), .done(done[4]), .checks(nchecks[4]), .failures(nfail[4]));
  tb_mlp_net_check #(.NI(4), .NH(3), .NO(3), .KK(3), .NV(NV),
    .W1(BS_W1), .B1(BS_B1), .W2(BS_W2), .B2(BS_B2), .E1(BS_E1), .E2(BS_E2)
  ) u_bs (.clk(clk), .rst_n(rst_n), .done(done[5]), .checks(nchecks[5]), .failures(nfail[5]));
  tb_mlp_net_check #(.NI(7), .NH(3), .NO(3), .KK(1), .NV(NV),
    .W1(SE_W1), .B1(SE_B1), .W2(SE_W2), .B2(SE_B2), .E1(SE_E1), .E2(SE_E2)
  ) u_se (.clk(clk), .rst_n(rst_n), .done(done[6]), .checks(nchecks[6]), .failures(nfail[6]));
  tb_mlp_net_check #(.NI(9), .NH(3), .NO(2), .KK(2), .NV(NV),
    .W1(BC_W1), .B1(BC_B1), .W2(BC_W2), .B2(BC_B2), .E1(BC_E1), .E2(BC_E2)
  ) u_bc (.clk(clk), .rst_n(rst_n), .done(done[7]), .checks(nchecks[7]), .failures(nfail[7]));
  tb_mlp_net_check #(.NI(6), .NH(3), .NO(2), .KK(3), .NV(NV),
    .W1(V2_W1), .B1(V2_B1), .W2(V2_W2), .B2(V2_B2), .E1(V2_E1), .E2(V2_E2)
  ) u_v2 (.clk(clk), .rst_n(rst_n), .done(done[8]), .checks(nchecks[8]), .failures(nfail[8]));
  tb_mlp_net_check #(.NI(5), .NH(3), .NO(2), .KK(1), .NV(NV),
    .W1(MA_W1), .B1(MA_B1), .W2(MA_W2), .B2(MA_B2), .E1(MA_E1), .E2(MA_E2)
  ) u_ma (.clk(clk), .rst_n(rst_n), .done(done[9]), .checks(nchecks[9]), .failures(nfail[9]));

  initial begin
    int checks, failures;
    bit all_done;
    #1000000;
    checks = 0; failures = 1;
    for (int g = 0; g < NNET; g++) begin checks += nchecks[g]; failures += nfail[g]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    bit all_done;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int g = 0; g < NNET; g++) if (!done[g]) all_done = 1'b0;
    end while (!all_done);
    checks = 0; failures = 0;
    for (int g = 0; g < NNET; g++) begin checks += nchecks[g]; failures += nfail[g]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
