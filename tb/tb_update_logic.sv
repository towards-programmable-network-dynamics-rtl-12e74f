`timescale 1ns/1ps
// tb_update_logic: self-checking test of the HLS concentration addressing.
//
// First the paper's example 2 S3 + S2 -> ... (S3 in slot 0 with two
// records, S2 in slot 1 with one), which must take two steps: (S3 + S2) then
// (S3). Then random reactions: the number of steps must be the highest
// active order index + 1, and the addresses shown in each step must be the
// records of the counter's current order index, counting down.
module tb_update_logic;
  import chem_pkg::*;
  localparam int NP = 3, NO = 4;
  logic clk = 0, rst_n = 0, exe_react = 0;
  logic [SA_W-1:0] alpha_r [NP][NO], beta_r [NP][NO];
  logic busy, step_en, done;
  logic [SA_W-1:0] sub_addr [NP], add_addr [NP];
  int checks = 0, failures = 0;

  update_logic #(.N_PSI(NP), .N_ORD(NO)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_and_check();
    int top, steps;
    top = 0;
    for (int o = 0; o < NO; o++) for (int p = 0; p < NP; p++)
      if (alpha_r[p][o] != 0 || beta_r[p][o] != 0) top = o;
    @(negedge clk); exe_react = 1; @(negedge clk); exe_react = 0;
    steps = 0;
    while (step_en) begin
      for (int p = 0; p < NP; p++) begin
        checks += 2;
        if (sub_addr[p] != alpha_r[p][top - steps]) begin failures++; $display("FAIL sub"); end
        if (add_addr[p] != beta_r[p][top - steps])  begin failures++; $display("FAIL add"); end
      end
      checks++;
      if (done != (steps == top)) begin failures++; $display("FAIL done"); end
      steps++;
      @(negedge clk);
      if (steps > NO + 1) break;
    end
    checks++;
    if (steps != top + 1) begin failures++; $display("FAIL steps %0d exp %0d", steps, top + 1); end
  endtask

  initial begin
    for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++) begin alpha_r[p][o] = 0; beta_r[p][o] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    alpha_r[0][0] = 3; alpha_r[0][1] = 3; alpha_r[1][0] = 2;
    begin
      int n3, n2, st;
      n3 = 0; n2 = 0; st = 0;
      @(negedge clk); exe_react = 1; @(negedge clk); exe_react = 0;
      while (step_en) begin
        for (int p = 0; p < NP; p++) begin
          if (sub_addr[p] == 3) n3++;
          if (sub_addr[p] == 2) n2++;
        end
        st++; @(negedge clk);
      end
      checks += 3;
      if (n3 != 2) begin failures++; $display("FAIL S3 decrements %0d", n3); end
      if (n2 != 1) begin failures++; $display("FAIL S2 decrements %0d", n2); end
      if (st != 2) begin failures++; $display("FAIL example steps %0d", st); end
    end
    for (int it = 0; it < 300; it++) begin
      for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++) begin
        alpha_r[p][o] = ($urandom_range(0, 2) == 0) ? SA_W'($urandom_range(1, 9)) : 0;
        beta_r[p][o]  = ($urandom_range(0, 3) == 0) ? SA_W'($urandom_range(1, 9)) : 0;
      end
      run_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
