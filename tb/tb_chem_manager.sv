`timescale 1ns/1ps
// tb_chem_manager: end-to-end test of the chemical middleware.
//
// Two engines, reduced table sizes and a short UART bit time. A host model
// plays the role of the egress queue of the paper's experiment: every
// enqueued packet pulses ev_in (one molecule of S per packet), a pulse on
// ev_out[0] authorises one packet to leave, a pulse on ev_out[1] drops one.
// All configuration goes through the UART programming frames. Phases:
//  1. engine 0 runs Rnet2 (S -> P), a pacer: every packet must leave;
//  2. engine 0 is reprogrammed at runtime to Rnet1 (S + E -> ES,
//     ES -> E + P) with e0 = 4; a load above the cap e0*k2 must be served at
//     no more than the cap and all packets must leave in the end;
//  3. k2 is halved and e0 doubled by single register writes (same cap);
//  4. engine 1 runs Rnet3 (Rnet1 plus 2 S -> S + D) on its own queue; every
//     packet must either leave or be dropped, and some must be dropped;
//  5. the monitor logs concentrations; reports are decoded from uart_tx.
// Each mechanism (programming frames, runtime reprogramming, retuning, event
// input, output, drop output, firings of each reaction, dependent
// rescheduling, monitor report, rate cap reached) is counted and must occur.
module tb_chem_manager;
  import chem_pkg::*;
  localparam int DIV = 16, NA = 2, NR = 4, NP = 2, NO = 2, NS = 15;
  localparam int S = 1, E = 2, ES = 3, P = 4, D = 5;
  logic clk = 0, rst_n = 0, uart_rx = 1, uart_tx;
  logic [3:0] ev_in = 0, ev_out;
  int checks = 0, failures = 0;
  longint cyc = 0;
  int enq [2], deq [2], drop [2];
  int n_frames = 0, n_fire [NA][NR], n_sched = 0, n_reports = 0, n_cap = 0;
  int n_reprog = 0, n_retune = 0;

  chem_manager #(.NUM_AC(NA), .N_REACT(NR), .N_PSI(NP), .N_ORD(NO), .N_SPECIES(NS),
                 .N_IN(4), .N_OUT(4), .N_MON(2), .OUT_PULSE(4), .BAUD_DIV(DIV)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #100000000; failures++;
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

  task automatic prog(input int ac, input tbl_e tbl, input int idx, input logic [31:0] data);
    send_byte(8'h57); send_byte({4'(ac), 4'(tbl)}); send_byte(8'(idx >> 8)); send_byte(8'(idx));
    send_byte(data[31:24]); send_byte(data[23:16]); send_byte(data[15:8]); send_byte(data[7:0]);
    repeat (4) @(posedge clk);
    n_frames++;
  endtask

  task automatic rec(input int ac, input tbl_e tbl, input int r, input int p, input int o, input int sp);
    prog(ac, tbl, (r * NP + p) * NO + o, 32'(sp));
  endtask

  // host queue model: count authorised and dropped packets (rising edges)
  logic [3:0] ev_out_q = 0;
  always @(posedge clk) if (rst_n) begin
    ev_out_q <= ev_out;
    for (int q = 0; q < 2; q++) begin
      if (ev_out[2*q] && !ev_out_q[2*q]) deq[q]++;
      if (ev_out[2*q+1] && !ev_out_q[2*q+1]) drop[q]++;
    end
  end

  // engine activity counters
  always @(posedge clk) if (rst_n) begin
    if (dut.g_ac[0].u_ac.fire) n_fire[0][dut.g_ac[0].u_ac.fire_idx]++;
    if (dut.g_ac[1].u_ac.fire) n_fire[1][dut.g_ac[1].u_ac.fire_idx]++;
    if (dut.g_ac[0].u_ac.sched_done) n_sched++;
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
      if (b[0] != 8'hA5 || b[1] > 1) begin failures++; $display("FAIL monitor frame %h %h", b[0], b[1]); end
      else n_reports++;
    end
  end

  task automatic enqueue(input int q);
    @(negedge clk); ev_in[q] = 1; @(negedge clk); ev_in[q] = 0;
    enq[q]++;
  endtask

  task automatic drain(input int q, input int max_cycles);
    int w;
    w = 0;
    while (deq[q] + drop[q] < enq[q] && w < max_cycles) begin @(posedge clk); w++; end
  endtask

  initial begin
    real k2, e0;
    for (int a = 0; a < NA; a++) for (int r = 0; r < NR; r++) n_fire[a][r] = 0;
    for (int q = 0; q < 2; q++) begin enq[q] = 0; deq[q] = 0; drop[q] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20) @(posedge clk);

    // I/O maps: queue 0 <-> engine 0, queue 1 <-> engine 1; 1 molecule per packet
    prog(0, TBL_IN,  0, {4'd0, 4'd0, 8'(S), 16'd1});
    prog(0, TBL_OUT, 0, {4'd0, 4'd0, 8'(P), 16'd1});
    prog(0, TBL_IN,  1, {4'd0, 4'd1, 8'(S), 16'd1});
    prog(0, TBL_OUT, 2, {4'd0, 4'd1, 8'(P), 16'd1});
    prog(0, TBL_OUT, 3, {4'd0, 4'd1, 8'(D), 16'd1});
    prog(0, TBL_MONSEL, 0, {1'b1, 19'd0, 4'd0, 8'(S)});
    prog(0, TBL_MONSEL, 1, {1'b1, 19'd0, 4'd1, 8'(D)});
    prog(0, TBL_MONPER, 0, 32'd20000);

    // ---- phase 1: Rnet2 pacer on engine 0
    rec(0, TBL_ALPHA, 0, 0, 0, S);
    rec(0, TBL_BETA,  0, 0, 0, P);
    prog(0, TBL_K, 0, r2f(2.0e-3));
    for (int i = 0; i < 20; i++) begin enqueue(0); repeat ($urandom_range(50, 400)) @(posedge clk); end
    drain(0, 200000);
    checks++;
    if (deq[0] != enq[0]) begin failures++; $display("FAIL Rnet2: %0d of %0d packets left", deq[0], enq[0]); end

    // ---- phase 2: runtime reprogramming to Rnet1, e0 = 4, k2 = 5e-4 (cap 2e-3 /cycle)
    rec(0, TBL_ALPHA, 0, 1, 0, E);
    rec(0, TBL_BETA,  0, 0, 0, ES);
    rec(0, TBL_ALPHA, 1, 0, 0, ES);
    rec(0, TBL_BETA,  1, 0, 0, E);
    rec(0, TBL_BETA,  1, 1, 0, P);
    k2 = 5.0e-4; e0 = 4.0;
    prog(0, TBL_K, 0, r2f(1.0e-3));
    prog(0, TBL_K, 1, r2f(k2));
    prog(0, TBL_C, E, 32'($rtoi(e0)));
    n_reprog++;
    begin
      longint t0; int d0;
      // offered load: one packet per ~150 cycles, three times the cap but
      // within what the engine can absorb (about 50 cycles per input event)
      for (int i = 0; i < 30; i++) begin enqueue(0); repeat (148) @(posedge clk); end
      t0 = cyc; d0 = deq[0];
      for (int i = 0; i < 60; i++) begin enqueue(0); repeat (148) @(posedge clk); end
      // served rate while saturated must not exceed the cap e0*k2
      checks++;
      if (real'(deq[0] - d0) > 1.2 * e0 * k2 * real'(cyc - t0) + 2.0) begin
        failures++; $display("FAIL rate cap: %0d packets in %0d cycles", deq[0] - d0, cyc - t0);
      end
      if (real'(deq[0] - d0) > 0.7 * e0 * k2 * real'(cyc - t0)) n_cap++;
      $display("Rnet1 saturated: %0d packets in %0d cycles (cap %g)", deq[0] - d0, cyc - t0, e0 * k2 * real'(cyc - t0));
    end
    drain(0, 400000);
    checks++;
    if (deq[0] != enq[0]) begin failures++; $display("FAIL Rnet1: %0d of %0d packets left", deq[0], enq[0]); end

    // ---- phase 3: retune k2 = 2.5e-4, e0 = 8 (two register writes)
    k2 = 2.5e-4; e0 = 8.0;
    prog(0, TBL_K, 1, r2f(k2));
    prog(0, TBL_C, E, 32'd8 - 32'(dut.c[0][ES]));
    n_retune++;
    for (int i = 0; i < 40; i++) begin enqueue(0); repeat ($urandom_range(20, 200)) @(posedge clk); end
    drain(0, 400000);
    checks += 2;
    if (deq[0] != enq[0]) begin failures++; $display("FAIL retuned: %0d of %0d packets left", deq[0], enq[0]); end
    if (int'(dut.c[0][E]) + int'(dut.c[0][ES]) != 8) begin failures++; $display("FAIL e0 after retune"); end

    // ---- phase 4: Rnet3 (AQM) on engine 1
    rec(1, TBL_ALPHA, 0, 0, 0, S);
    rec(1, TBL_ALPHA, 0, 1, 0, E);
    rec(1, TBL_BETA,  0, 0, 0, ES);
    rec(1, TBL_ALPHA, 1, 0, 0, ES);
    rec(1, TBL_BETA,  1, 0, 0, E);
    rec(1, TBL_BETA,  1, 1, 0, P);
    rec(1, TBL_ALPHA, 2, 0, 0, S);
    rec(1, TBL_ALPHA, 2, 0, 1, S);
    rec(1, TBL_BETA,  2, 0, 0, S);
    rec(1, TBL_BETA,  2, 1, 0, D);
    prog(1, TBL_K, 0, r2f(1.0e-3));
    prog(1, TBL_K, 1, r2f(5.0e-4));
    prog(1, TBL_K, 2, r2f(2.0e-5));
    prog(1, TBL_C, E, 32'd2);
    for (int i = 0; i < 150; i++) begin enqueue(1); repeat (40) @(posedge clk); end
    drain(1, 600000);
    checks += 2;
    if (deq[1] + drop[1] != enq[1]) begin failures++; $display("FAIL Rnet3: %0d + %0d of %0d", deq[1], drop[1], enq[1]); end
    if (drop[1] == 0) begin failures++; $display("FAIL Rnet3 never dropped"); end
    $display("Rnet3: %0d sent, %0d dropped of %0d", deq[1], drop[1], enq[1]);

    // ---- mechanism coverage
    repeat (30000) @(posedge clk);
    begin
      int cnt [13];
      string nm [13] = '{"frames", "reprogram", "retune", "ev_in", "ev_out", "drop",
                         "fire0", "fire1", "drop_reaction", "dependent_resched", "monitor",
                         "rate_cap", "second_engine"};
      cnt = '{n_frames, n_reprog, n_retune, enq[0] + enq[1], deq[0] + deq[1], drop[1],
              n_fire[0][0], n_fire[0][1], n_fire[1][2], n_sched - n_fire[0][0] - n_fire[0][1],
              n_reports, n_cap, n_fire[1][0]};
      for (int i = 0; i < 13; i++) begin
        checks++;
        $display("mechanism %s: %0d", nm[i], cnt[i]);
        if (cnt[i] <= 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
      checks++;
      if (int'(dut.u_prog.frames) != n_frames) begin failures++; $display("FAIL frame count"); end
    end
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
