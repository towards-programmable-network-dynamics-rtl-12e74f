`timescale 1ns/1ps
// tb_monitor: self-checking test of the periodic concentration log.
//
// Enables three of four slots and a period, models the concentration read
// path as a function of (engine, species), decodes the UART output and
// checks that each report is 0xA5, the slot number and the concentration of
// the slot's species, that disabled slots are skipped, and that reports
// repeat with the programmed period.
module tb_monitor;
  import chem_pkg::*;
  localparam int DIV = 8, NM = 4, PER = 3000;
  logic clk = 0, rst_n = 0, cfg_valid = 0, tx;
  prog_wr_t cfg;
  logic [3:0] mon_ac;
  logic [SA_W-1:0] mon_addr;
  logic [15:0] mon_c, reports;
  int checks = 0, failures = 0;
  longint cyc = 0;

  monitor #(.BAUD_DIV(DIV), .N_MON(NM), .C_W(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign mon_c = {4'(mon_ac), 4'h0, mon_addr} + 16'(cyc / 10000);
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic set(input tbl_e t, input int idx, input logic [31:0] d);
    @(negedge clk); cfg.ac = 0; cfg.tbl = t; cfg.idx = 16'(idx); cfg.data = d; cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic recv_byte(output logic [7:0] b);
    @(negedge tx);
    repeat (DIV / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); b[i] = tx; end
    repeat (DIV) @(posedge clk);
  endtask

  initial begin
    int slots [3] = '{0, 2, 3};
    int sp [3] = '{5, 17, 200};
    longint t_first;
    cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) set(TBL_MONSEL, slots[i], {1'b1, 19'd0, 4'(i), 8'(sp[i])});
    set(TBL_MONPER, 0, PER);
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < 3; i++) begin
        logic [7:0] b0, b1, b2, b3;
        logic [15:0] exp_v;
        recv_byte(b0);
        if (rep == 0 && i == 0) t_first = cyc;
        recv_byte(b1);
        exp_v = {4'(i), 4'h0, 8'(sp[i])} + 16'(cyc / 10000);
        recv_byte(b2); recv_byte(b3);
        checks += 3;
        if (b0 != 8'hA5) begin failures++; $display("FAIL sync %h", b0); end
        if (b1 != 8'(slots[i])) begin failures++; $display("FAIL slot %0d exp %0d", b1, slots[i]); end
        if ({b2, b3} != exp_v) begin failures++; $display("FAIL value %h exp %h", {b2, b3}, exp_v); end
      end
      if (rep == 2) begin
        checks++;
        // third report starts two periods after the first
        if (cyc - t_first < 2 * PER || cyc - t_first > 2 * PER + 12 * 10 * DIV) begin
          failures++; $display("FAIL period: %0d cycles", cyc - t_first);
        end
      end
    end
    checks++;
    if (reports != 16'd9) begin failures++; $display("FAIL reports=%0d", reports); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
