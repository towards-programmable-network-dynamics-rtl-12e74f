`timescale 1ns/1ps
// tb_reaction_timers: self-checking test of the next-reaction-time registers.
//
// Loads random times (and "never") into random registers while the others
// count, and checks every register and due flag each cycle against a model
// that counts down by one per cycle, holds at 0 and never counts T_NEVER.
module tb_reaction_timers;
  import chem_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst_n = 0, load_en = 0;
  logic [1:0] load_idx = 0;
  logic [T_W-1:0] load_val = 0;
  logic [T_W-1:0] t [NR];
  logic [NR-1:0] due;
  logic [T_W-1:0] model [NR];
  int checks = 0, failures = 0;

  reaction_timers #(.N_REACT(NR)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < NR; r++) model[r] = T_NEVER;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        checks += 2;
        if (t[r] != model[r]) begin failures++; $display("FAIL t[%0d]=%0d exp %0d", r, t[r], model[r]); end
        if (due[r] != (model[r] == 0)) begin failures++; $display("FAIL due[%0d]", r); end
      end
      load_en = ($urandom_range(0, 7) == 0);
      load_idx = 2'($urandom);
      load_val = ($urandom_range(0, 9) == 0) ? T_NEVER : T_W'($urandom_range(0, 40));
      for (int r = 0; r < NR; r++)
        if (load_en && load_idx == 2'(r)) model[r] = load_val;
        else if (model[r] != T_NEVER && model[r] != 0) model[r] = model[r] - 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
