`timescale 1ns/1ps
// tb_io_mapper: self-checking test of the external event mapping.
//
// Two engines are modelled in the testbench as concentration arrays that
// answer I/O requests after a random delay. Input events (short pulses,
// some in bursts faster than the engines answer) must each add the
// channel's ratio to the mapped species of the mapped engine; molecules
// placed on the output species must leave in batches of the ratio, each with
// one OUT_PULSE-cycle pulse on the channel's output. Unmapped channels must
// stay silent.
module tb_io_mapper;
  import chem_pkg::*;
  localparam int NA = 2, NI = 2, NO = 2, PW = 4;
  logic clk = 0, rst_n = 0, cfg_valid = 0;
  prog_wr_t cfg;
  logic [NI-1:0] ev_in = 0;
  logic [NO-1:0] ev_out;
  logic [NA-1:0] io_valid, io_ready = 0, io_ok;
  io_op_e io_op;
  logic [SA_W-1:0] io_addr;
  logic [15:0] io_amt, io_c;
  logic [3:0] io_ac;
  logic [15:0] in_events, out_events;
  int conc [NA][256];
  int checks = 0, failures = 0;
  int pulses [NO];
  int pw [NO];

  io_mapper #(.NUM_AC(NA), .N_IN(NI), .N_OUT(NO), .OUT_PULSE(PW), .C_W(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  assign io_c = 16'(conc[io_ac % NA][io_addr]);
  always_comb
    for (int a = 0; a < NA; a++)
      io_ok[a] = (io_op == IO_ADD) || (conc[a][io_addr] >= int'(io_amt));

  // engine models
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (|io_valid) begin
        int a;
        a = io_valid[1] ? 1 : 0;
        checks++;
        if ($countones(io_valid) != 1 || int'(io_ac) != a) begin failures++; $display("FAIL io_valid %b ac %0d", io_valid, io_ac); end
        repeat ($urandom_range(0, 6)) @(negedge clk);
        io_ready[a] = 1;
        begin
          io_op_e op; int ad, am;
          op = io_op; ad = int'(io_addr); am = int'(io_amt);
          @(posedge clk); #1;
          if (op == IO_ADD) conc[a][ad] += am;
          else if (conc[a][ad] >= am) conc[a][ad] -= am;
        end
        @(negedge clk); io_ready[a] = 0;
      end
    end
  end

  // output pulse monitor
  always @(posedge clk) if (rst_n) for (int j = 0; j < NO; j++) begin
    if (ev_out[j]) pw[j]++;
    else if (pw[j] != 0) begin
      checks++;
      if (pw[j] != PW) begin failures++; $display("FAIL pulse width %0d", pw[j]); end
      pulses[j]++; pw[j] = 0;
    end
  end

  task automatic set(input tbl_e t, input int idx, input logic [31:0] d);
    @(negedge clk); cfg.ac = 0; cfg.tbl = t; cfg.idx = 16'(idx); cfg.data = d; cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    int n0, n1;
    cfg = '0;
    for (int a = 0; a < NA; a++) for (int s = 0; s < 256; s++) conc[a][s] = 0;
    for (int j = 0; j < NO; j++) begin pulses[j] = 0; pw[j] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // in0 -> engine 0 species 1, ratio 3; in1 -> engine 1 species 7, ratio 5
    set(TBL_IN, 0, {4'd0, 4'd0, 8'd1, 16'd3});
    set(TBL_IN, 1, {4'd0, 4'd1, 8'd7, 16'd5});
    // out0 <- engine 0 species 4, ratio 2; out1 unmapped
    set(TBL_OUT, 0, {4'd0, 4'd0, 8'd4, 16'd2});
    n0 = 0; n1 = 0;
    for (int it = 0; it < 60; it++) begin
      int ch;
      ch = $urandom_range(0, 1);
      @(negedge clk); ev_in[ch] = 1; @(negedge clk); ev_in[ch] = 0;
      if (ch == 0) n0++; else n1++;
      repeat ($urandom_range(1, 40)) @(negedge clk);
    end
    conc[0][4] = 20;
    repeat (2000) @(negedge clk);
    checks += 6;
    if (conc[0][1] != 3 * n0) begin failures++; $display("FAIL in0 %0d exp %0d", conc[0][1], 3 * n0); end
    if (conc[1][7] != 5 * n1) begin failures++; $display("FAIL in1 %0d exp %0d", conc[1][7], 5 * n1); end
    if (conc[0][4] != 0) begin failures++; $display("FAIL out left %0d", conc[0][4]); end
    if (pulses[0] != 10) begin failures++; $display("FAIL out0 pulses %0d", pulses[0]); end
    if (pulses[1] != 0) begin failures++; $display("FAIL out1 pulses %0d", pulses[1]); end
    if (in_events != 16'(n0 + n1) || out_events != 16'd10) begin failures++; $display("FAIL counters"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
