`timescale 1ns/1ps
// tb_propensity_select: self-checking test of the concentration selection.
//
// Random stoichiometric tables and concentrations; for every reaction, slot
// and order record the output must be the concentration of the addressed
// species, or 1 for an inactive record.
module tb_propensity_select;
  import chem_pkg::*;
  localparam int NR = 2, NP = 4, NO = 4, NS = 7, CW = 16;
  logic [SA_W-1:0] alpha [NR][NP][NO];
  logic [CW-1:0] c [NS+1];
  logic [0:0] r_sel;
  logic [1:0] rd_addr, rd_ord;
  logic [CW-1:0] c_out;
  int checks = 0, failures = 0;

  propensity_select #(.N_REACT(NR), .N_PSI(NP), .N_ORD(NO), .N_SPECIES(NS), .C_W(CW)) dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 50; it++) begin
      c[0] = 1;
      for (int s = 1; s <= NS; s++) c[s] = CW'($urandom);
      for (int r = 0; r < NR; r++) for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++)
        alpha[r][p][o] = ($urandom_range(0, 1) == 0) ? 0 : SA_W'($urandom_range(1, NS));
      for (int r = 0; r < NR; r++) for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++) begin
        int exp_v;
        r_sel = 1'(r); rd_addr = 2'(p); rd_ord = 2'(o);
        #1;
        exp_v = (alpha[r][p][o] == 0) ? 1 : int'(c[alpha[r][p][o]]);
        checks++;
        if (int'(c_out) != exp_v) begin failures++; $display("FAIL %0d %0d %0d: %0d exp %0d", r, p, o, c_out, exp_v); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
