// tb_bespoke_mult: exhaustive check of constant multipliers for several
// hardwired magnitudes (zero, one, powers of two, odd values, the 8-bit
// maximum), with 4-bit and 6-bit inputs. Each product must equal a*|w|.
module tb_bespoke_mult;
  int checks = 0, failures = 0;

  localparam int NW = 7;
  localparam int WV [NW] = '{0, 1, 8, 3, 5, 127, 100};

  logic [3:0]  a4;
  logic [5:0]  a6;
  logic [31:0] res [NW];

  for (genvar g = 0; g < NW; g++) begin : g_dut
    if (g < NW - 1) begin : g4
      logic [4+ax_mlp_pkg::mag_bits(WV[g])-1:0] p;
      bespoke_mult #(.A_W(4), .WABS(WV[g])) dut (.a(a4), .p(p));
      assign res[g] = 32'(p);
    end else begin : g6
      logic [6+ax_mlp_pkg::mag_bits(WV[g])-1:0] p;
      bespoke_mult #(.A_W(6), .WABS(WV[g])) dut (.a(a6), .p(p));
      assign res[g] = 32'(p);
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      a4 = 4'(v);
      a6 = 6'(v);
      #1;
      for (int g = 0; g < NW; g++) begin
        int exp_p;
        if (g < NW - 1 && v >= 16) continue;
        exp_p = ((g < NW - 1) ? (v % 16) : v) * WV[g];
        checks++;
        if (res[g] != 32'(exp_p)) begin
          failures++;
          $display("FAIL w=%0d a=%0d got %0d exp %0d", WV[g], v, res[g], exp_p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
