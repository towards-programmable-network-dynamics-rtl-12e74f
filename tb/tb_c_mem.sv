`timescale 1ns/1ps
// tb_c_mem: self-checking test of the concentration memory.
//
// Uses the small engine of the paper's addressing example (3 species of
// 4 bits, 3 slices) so that saturation is reached quickly. Random reaction
// steps, event batches and programming writes are applied and every register
// is compared after each cycle with a reference model kept in the testbench.
module tb_c_mem;
  import chem_pkg::*;
  localparam int NS = 3, CW = 4, NP = 3;
  logic clk = 0, rst_n = 0;
  logic step_en, io_en, wr_en, io_ok;
  io_op_e io_op;
  logic [SA_W-1:0] sub_addr [NP], add_addr [NP];
  logic [SA_W-1:0] io_addr, wr_addr;
  logic [CW-1:0] io_amt, wr_data;
  logic [CW-1:0] c [NS+1];
  int model [NS+1];
  int checks = 0, failures = 0;

  c_mem #(.N_SPECIES(NS), .C_W(CW), .N_PSI(NP)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int s = 0; s <= NS; s++) begin
      checks++;
      if (int'(c[s]) != model[s]) begin
        failures++;
        $display("FAIL c[%0d]=%0d expected %0d", s, c[s], model[s]);
      end
    end
  endtask

  initial begin
    step_en = 0; io_en = 0; wr_en = 0; io_op = IO_ADD; io_addr = 0; wr_addr = 0;
    io_amt = 0; wr_data = 0;
    for (int p = 0; p < NP; p++) begin sub_addr[p] = 0; add_addr[p] = 0; end
    model[0] = 1; for (int s = 1; s <= NS; s++) model[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    // the paper's example 2 S3 + S2: after programming S3 = 5, S2 = 4, two
    // steps (S3 + S2) then (S3)
    wr_en = 1; wr_addr = 3; wr_data = 5; @(negedge clk);
    wr_addr = 2; wr_data = 4; @(negedge clk); wr_en = 0;
    model[3] = 5; model[2] = 4; compare();
    step_en = 1; sub_addr[0] = 3; sub_addr[1] = 2; @(negedge clk);
    sub_addr[1] = 0; @(negedge clk); step_en = 0; sub_addr[0] = 0;
    model[3] = 3; model[2] = 3; compare();
    for (int it = 0; it < 3000; it++) begin
      int kind;
      kind = $urandom_range(0, 2);
      step_en = (kind == 0); io_en = (kind == 1); wr_en = (kind == 2);
      for (int p = 0; p < NP; p++) begin
        sub_addr[p] = SA_W'($urandom_range(0, NS));
        add_addr[p] = SA_W'($urandom_range(0, NS));
      end
      io_op = io_op_e'($urandom_range(0, 1));
      io_addr = SA_W'($urandom_range(0, NS)); io_amt = CW'($urandom_range(0, 15));
      wr_addr = SA_W'($urandom_range(0, NS)); wr_data = CW'($urandom);
      #1;
      // reference model
      if (kind == 0) begin
        for (int s = 1; s <= NS; s++) begin
          int v; v = model[s];
          for (int p = 0; p < NP; p++) begin
            if (sub_addr[p] == SA_W'(s)) v--;
            if (add_addr[p] == SA_W'(s)) v++;
          end
          model[s] = (v < 0) ? 0 : (v > 15) ? 15 : v;
        end
      end else if (kind == 1) begin
        int cur; bit ok;
        cur = model[io_addr];
        ok = (io_op == IO_ADD) || (cur >= int'(io_amt));
        checks++;
        if (io_ok != ok) begin failures++; $display("FAIL io_ok"); end
        if (io_addr != 0) begin
          if (io_op == IO_ADD) model[io_addr] = (cur + io_amt > 15) ? 15 : cur + io_amt;
          else if (ok) model[io_addr] = cur - io_amt;
        end
      end else begin
        if (wr_addr != 0) model[wr_addr] = wr_data;
      end
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
