`timescale 1ns/1ps
// tb_chem_full: one complete operation of the middleware at its default size.
//
// The manager is instantiated with no parameter overrides: one engine of
// 8 reactions, 8 reactants x 8 orders per reaction, 255 species, 16-bit
// concentrations and 9600-baud links at an 80 MHz clock (8333 cycles per
// bit). A host model programs the Rnet2 pacer (S -> P) over the program link
// frame by frame, exactly as a configuration tool would: the reactant and
// product records, the rate constant, the event input and output maps and one
// monitor slot. It then enqueues packets on ev_in[0] (one molecule of S each)
// and counts the authorisation pulses on ev_out[0] (one per molecule of P).
// Checks: every frame is accepted, every packet leaves, the interval between
// the first two authorisations of a single queued packet matches 1/(k*S),
// the concentrations end at S = P = 0, and a monitor report of S arrives
// framed as 0xA5, slot, value.
module tb_chem_full;
  import chem_pkg::*;
  localparam int DIV = 8333;            // default bit time of the links
  localparam int S = 1, P = 2;
  localparam real K0 = 1.0e-3;          // per cycle
  logic clk = 0, rst_n = 0, uart_rx = 1, uart_tx;
  logic [3:0] ev_in = 0, ev_out;
  int checks = 0, failures = 0;
  longint cyc = 0;
  int enq = 0, deq = 0, n_frames = 0, n_reports = 0;
  longint t_deq [$];

  chem_manager dut (.*);
  always #6.25 clk = ~clk;             // 80 MHz
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #1000000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] r2f(input real x);
    int e; real m;
    if (x <= 0.0) return 32'd0;
    e = 0; m = x;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {1'b0, 8'(e + 127), 23'($rtoi((m - 1.0) * 8388608.0))};
  endfunction

  task automatic send_byte(input logic [7:0] b);
    uart_rx = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (DIV) @(posedge clk); end
    uart_rx = 1; repeat (DIV) @(posedge clk);
  endtask

  task automatic prog(input tbl_e tbl, input int idx, input logic [31:0] data);
    send_byte(8'h57); send_byte({4'd0, 4'(tbl)}); send_byte(8'(idx >> 8)); send_byte(8'(idx));
    send_byte(data[31:24]); send_byte(data[23:16]); send_byte(data[15:8]); send_byte(data[7:0]);
    repeat (4) @(posedge clk);
    n_frames++;
  endtask

  logic ev_out_q = 0;
  always @(posedge clk) if (rst_n) begin
    ev_out_q <= ev_out[0];
    if (ev_out[0] && !ev_out_q) begin deq++; t_deq.push_back(cyc); end
  end

  // monitor decoder: 0xA5, slot, value high, value low
  initial begin
    logic [7:0] b [4];
    forever begin
      for (int i = 0; i < 4; i++) begin
        @(negedge uart_tx);
        repeat (DIV / 2) @(posedge clk);
        for (int j = 0; j < 8; j++) begin repeat (DIV) @(posedge clk); b[i][j] = uart_tx; end
        repeat (DIV) @(posedge clk);
      end
      checks++;
      if (b[0] != 8'hA5 || b[1] != 8'd0) begin failures++; $display("FAIL monitor frame %h %h", b[0], b[1]); end
      else n_reports++;
      $display("monitor report: slot %0d value %0d at cycle %0d", b[1], {b[2], b[3]}, cyc);
    end
  end

  task automatic enqueue();
    @(negedge clk); ev_in[0] = 1; @(negedge clk); ev_in[0] = 0;
    enq++;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20) @(posedge clk);
    // Rnet2: reaction 0 consumes S (record 0) and produces P (record 0)
    prog(TBL_ALPHA, 0, 32'(S));
    prog(TBL_BETA,  0, 32'(P));
    prog(TBL_K,     0, r2f(K0));
    prog(TBL_IN,    0, {4'd0, 4'd0, 8'(S), 16'd1});
    prog(TBL_OUT,   0, {4'd0, 4'd0, 8'(P), 16'd1});
    prog(TBL_MONSEL, 0, {1'b1, 19'd0, 4'd0, 8'(S)});
    prog(TBL_MONPER, 0, 32'd400000);
    checks++;
    if (int'(dut.u_prog.frames) != n_frames) begin
      failures++; $display("FAIL frames %0d of %0d", dut.u_prog.frames, n_frames);
    end
    $display("programmed %0d frames by cycle %0d", n_frames, cyc);

    // one packet alone: it must leave about 1/(k*1) cycles after arrival
    begin
      longint t0;
      enqueue(); t0 = cyc;
      while (deq < 1 && cyc < t0 + 100000) @(posedge clk);
      checks++;
      if (deq != 1 || real'(t_deq[0] - t0) < 0.9 / K0 || real'(t_deq[0] - t0) > 1.1 / K0 + 400.0) begin
        failures++; $display("FAIL single packet: %0d out after %0d cycles", deq, t_deq.size() > 0 ? t_deq[0] - t0 : -1);
      end
      $display("single packet left after %0d cycles (1/k = %0d)", t_deq.size() > 0 ? t_deq[0] - t0 : -1, $rtoi(1.0 / K0));
    end

    // a burst of packets: all must leave
    for (int i = 0; i < 30; i++) begin enqueue(); repeat ($urandom_range(100, 1500)) @(posedge clk); end
    begin
      longint w; w = 0;
      while (deq < enq && w < 400000) begin @(posedge clk); w++; end
    end
    repeat (100) @(posedge clk);
    checks += 3;
    if (deq != enq) begin failures++; $display("FAIL %0d of %0d packets left", deq, enq); end
    if (dut.g_ac[0].u_ac.c[S] != 0) begin failures++; $display("FAIL S = %0d at the end", dut.g_ac[0].u_ac.c[S]); end
    if (dut.g_ac[0].u_ac.c[P] != 0) begin failures++; $display("FAIL P = %0d at the end", dut.g_ac[0].u_ac.c[P]); end
    $display("%0d packets in, %0d out", enq, deq);

    // wait for a monitor report
    begin
      longint w; w = 0;
      while (n_reports == 0 && w < 800000) begin @(posedge clk); w++; end
    end
    checks++;
    if (n_reports == 0) begin failures++; $display("FAIL no monitor report"); end
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
