`timescale 1ns/1ps
// tb_k_mem: self-checking test of the reaction coefficient bank.
//
// Checks the reset value 0.0, then random writes (some out of range, which
// must be ignored) against a reference array.
module tb_k_mem;
  import chem_pkg::*;
  localparam int NR = 8;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [15:0] wr_idx = 0;
  logic [31:0] wr_data = 0;
  logic [31:0] k [NR];
  logic [31:0] model [NR];
  int checks = 0, failures = 0;

  k_mem #(.N_REACT(NR)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic compare();
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (k[r] != model[r]) begin failures++; $display("FAIL k[%0d]=%h exp %h", r, k[r], model[r]); end
    end
  endtask
  initial begin
    for (int r = 0; r < NR; r++) model[r] = 32'h0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk); compare();
    // k0 = 20 s^-1 at 80 MHz = 2.5e-7 per cycle = 0x348637BD
    wr_en = 1; wr_idx = 0; wr_data = 32'h3486_37BD; @(negedge clk); wr_en = 0;
    model[0] = 32'h3486_37BD; compare();
    for (int it = 0; it < 300; it++) begin
      wr_en = $urandom_range(0, 1); wr_idx = 16'($urandom_range(0, NR + 3)); wr_data = $urandom;
      if (wr_en && wr_idx < NR) model[wr_idx] = wr_data;
      @(negedge clk); compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
