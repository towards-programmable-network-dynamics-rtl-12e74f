`timescale 1ns/1ps
// tb_stoich_mem: self-checking test of the stoichiometric table.
//
// Writes random addresses into random records, including out-of-range
// indices that must be ignored, and checks every record of the
// three-level table against a flat reference array after each write.
module tb_stoich_mem;
  import chem_pkg::*;
  localparam int NR = 3, NP = 3, NO = 3, D = NR * NP * NO;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [15:0] wr_idx = 0;
  logic [SA_W-1:0] wr_data = 0;
  logic [SA_W-1:0] rec [NR][NP][NO];
  logic [SA_W-1:0] model [D];
  int checks = 0, failures = 0;

  stoich_mem #(.N_REACT(NR), .N_PSI(NP), .N_ORD(NO)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare();
    for (int r = 0; r < NR; r++) for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++) begin
      checks++;
      if (rec[r][p][o] != model[(r*NP + p)*NO + o]) begin
        failures++; $display("FAIL rec[%0d][%0d][%0d]=%0h exp %0h", r, p, o, rec[r][p][o], model[(r*NP+p)*NO+o]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < D; i++) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk); compare();
    // the paper's example: 2 S3 + S2 in reaction 0, S3 in slot 0, S2 in slot 1
    wr_en = 1; wr_idx = 0; wr_data = 3; @(negedge clk);
    wr_idx = 1; @(negedge clk); wr_idx = 3; wr_data = 2; @(negedge clk); wr_en = 0;
    model[0] = 3; model[1] = 3; model[3] = 2; compare();
    for (int it = 0; it < 500; it++) begin
      wr_en = $urandom_range(0, 1); wr_idx = 16'($urandom_range(0, D + 4)); wr_data = SA_W'($urandom);
      if (wr_en && wr_idx < D) model[wr_idx] = wr_data;
      @(negedge clk); compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
