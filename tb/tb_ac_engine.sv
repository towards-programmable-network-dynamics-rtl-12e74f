`timescale 1ns/1ps
// tb_ac_engine: self-checking test of one chemical engine.
//
// A small engine (4 reactions, 2 slots of order 2, 7 species) is programmed
// through its programming port with three of the paper's reaction networks
// in turn, reprogramming it while it runs:
//  * Rnet2, S -> P (k0): every firing must move one molecule from S to P and
//    the interval between firings must be 1/(k0 cS) clock cycles plus a
//    bounded scheduling overhead;
//  * Rnet1, S + E -> ES (k1), ES -> E + P (k2): every firing must apply its
//    stoichiometry exactly, the enzyme total E + ES stays constant, and
//    reaction 2 must be rescheduled as a dependent of reaction 1;
//  * Rnet3 adds the second-order 2 S -> S + D (kD): S loses one net molecule
//    and D gains one per firing.
// Event batches (add to S, conditional subtract from P) are applied through
// the I/O port while the engine runs. The counts of firings, reschedulings,
// I/O batches and reprogramming writes are checked to be non-zero.
module tb_ac_engine;
  import chem_pkg::*;
  localparam int NR = 4, NP = 2, NO = 2, NS = 7, CW = 16;
  localparam int S = 1, E = 2, ES = 3, P = 4, D = 5;
  logic clk = 0, rst_n = 0;
  logic prog_valid = 0, prog_ready;
  prog_wr_t prog_wr;
  logic io_valid = 0, io_ready, io_ok;
  io_op_e io_op = IO_ADD;
  logic [SA_W-1:0] io_addr = 0;
  logic [CW-1:0] io_amt = 0;
  logic [CW-1:0] c [NS+1];
  logic fire, sched_done;
  logic [1:0] fire_idx;
  int checks = 0, failures = 0;
  int n_fire [NR];
  int n_sched = 0, n_io = 0, n_prog = 0;
  int snap [NS+1];
  int net;          // 0: Rnet2, 1: Rnet1, 3: Rnet3
  int last_fire_t;
  real k_now [NR];
  longint cyc = 0;

  ac_engine #(.N_REACT(NR), .N_PSI(NP), .N_ORD(NO), .N_SPECIES(NS), .C_W(CW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #40000000; failures++;
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

  task automatic prog(input tbl_e tbl, input int idx, input logic [31:0] data);
    @(negedge clk);
    prog_wr.ac = 0; prog_wr.tbl = tbl; prog_wr.idx = 16'(idx); prog_wr.data = data;
    prog_valid = 1;
    do @(posedge clk); while (!prog_ready);
    @(negedge clk); prog_valid = 0;
    n_prog++;
  endtask

  task automatic io(input io_op_e op, input int addr, input int amt, output bit ok);
    @(negedge clk);
    io_op = op; io_addr = SA_W'(addr); io_amt = CW'(amt); io_valid = 1;
    #1;
    while (!io_ready) begin @(negedge clk); #1; end
    ok = io_ok;
    @(negedge clk); io_valid = 0;
    n_io++;
  endtask

  task automatic set_rec(input tbl_e tbl, input int r, input int p, input int o, input int sp);
    prog(tbl, (r * NP + p) * NO + o, 32'(sp));
  endtask

  task automatic take_snap();
    for (int s = 0; s <= NS; s++) snap[s] = int'(c[s]);
  endtask

  task automatic expect_delta(input int sp, input int d);
    checks++;
    if (int'(c[sp]) != snap[sp] + d) begin
      failures++;
      $display("FAIL net%0d r%0d species %0d: %0d -> %0d, expected change %0d", net, fire_idx, sp, snap[sp], c[sp], d);
    end
  endtask

  // check every firing against the stoichiometry of the loaded network
  always @(negedge clk) if (rst_n) begin
    if (sched_done) n_sched++;
    if (fire) begin
      n_fire[fire_idx]++;
      if (net == 0 && fire_idx == 0) begin
        int dt; real exp_dt;
        expect_delta(S, -1); expect_delta(P, 1);
        exp_dt = 1.0 / (k_now[0] * real'(snap[S]));
        dt = int'(cyc) - last_fire_t;
        checks++;
        if (last_fire_t > 0 && (real'(dt) < exp_dt - 2.0 || real'(dt) > exp_dt + 120.0)) begin
          failures++; $display("FAIL Rnet2 interval %0d expected %g (+overhead)", dt, exp_dt);
        end
        last_fire_t = int'(cyc);
      end else if (net != 0 && fire_idx == 0) begin
        expect_delta(S, -1); expect_delta(E, -1); expect_delta(ES, 1);
      end else if (net != 0 && fire_idx == 1) begin
        expect_delta(ES, -1); expect_delta(E, 1); expect_delta(P, 1);
      end else if (net == 3 && fire_idx == 2) begin
        expect_delta(S, -1); expect_delta(D, 1);
      end else begin
        checks++; failures++; $display("FAIL unexpected firing of reaction %0d in net %0d", fire_idx, net);
      end
      if (net != 0) begin
        checks++;
        if (int'(c[E]) + int'(c[ES]) != snap[E] + snap[ES]) begin failures++; $display("FAIL enzyme conservation"); end
      end
    end
    // the state just before a reaction starts executing
    if (dut.upd_go) take_snap();
  end

  initial begin
    bit ok;
    for (int r = 0; r < NR; r++) begin n_fire[r] = 0; k_now[r] = 0.0; end
    net = 0; last_fire_t = 0;
    prog_wr = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    checks++;
    if (c[0] != 1) begin failures++; $display("FAIL reserved location"); end

    // ---- Rnet2: S -> P, k0 = 1e-4 per cycle, cS = 10
    set_rec(TBL_ALPHA, 0, 0, 0, S);
    set_rec(TBL_BETA,  0, 0, 0, P);
    k_now[0] = 1.0e-4;
    prog(TBL_K, 0, r2f(k_now[0]));
    prog(TBL_C, S, 10);
    wait (c[S] == 0);
    repeat (50) @(negedge clk);
    checks += 2;
    if (c[P] != 10) begin failures++; $display("FAIL Rnet2 P=%0d", c[P]); end
    if (n_fire[0] != 10) begin failures++; $display("FAIL Rnet2 firings %0d", n_fire[0]); end

    // ---- reprogram at runtime to Rnet1
    net = 1;
    prog(TBL_C, P, 0);
    set_rec(TBL_ALPHA, 0, 1, 0, E);
    set_rec(TBL_BETA,  0, 0, 0, ES);
    set_rec(TBL_ALPHA, 1, 0, 0, ES);
    set_rec(TBL_BETA,  1, 0, 0, E);
    set_rec(TBL_BETA,  1, 1, 0, P);
    k_now[0] = 2.0e-5; k_now[1] = 1.0e-3;
    prog(TBL_K, 0, r2f(k_now[0]));
    prog(TBL_K, 1, r2f(k_now[1]));
    prog(TBL_C, E, 5);
    prog(TBL_C, S, 20);
    // event batches while the engine runs
    repeat (3000) @(negedge clk);
    io(IO_ADD, S, 5, ok);
    checks++; if (!ok) begin failures++; $display("FAIL io add"); end
    wait (c[P] >= 3);
    io(IO_SUBGE, P, 2, ok);
    checks++; if (!ok) begin failures++; $display("FAIL io subge"); end
    io(IO_SUBGE, P, 1000, ok);
    checks++; if (ok) begin failures++; $display("FAIL io subge of too many"); end
    // retune k2 at runtime
    k_now[1] = 5.0e-4;
    prog(TBL_K, 1, r2f(k_now[1]));
    wait (c[S] == 0 && c[ES] == 0);
    repeat (50) @(negedge clk);
    checks += 2;
    if (c[E] != 5) begin failures++; $display("FAIL Rnet1 E=%0d", c[E]); end
    if (c[P] != 23) begin failures++; $display("FAIL Rnet1 P=%0d (expected 25 - 2)", c[P]); end

    // ---- extend to Rnet3: 2 S -> S + D
    net = 3;
    set_rec(TBL_ALPHA, 2, 0, 0, S);
    set_rec(TBL_ALPHA, 2, 0, 1, S);
    set_rec(TBL_BETA,  2, 0, 0, S);
    set_rec(TBL_BETA,  2, 1, 0, D);
    k_now[2] = 1.0e-4;
    prog(TBL_K, 2, r2f(k_now[2]));
    prog(TBL_C, S, 30);
    wait (c[S] == 0 && c[ES] == 0);
    repeat (50) @(negedge clk);
    checks += 2;
    if (int'(c[P]) + int'(c[D]) != 23 + 30) begin failures++; $display("FAIL Rnet3 P+D=%0d", c[P] + c[D]); end
    if (n_fire[2] == 0) begin failures++; $display("FAIL drop reaction never fired"); end

    $display("fires r0=%0d r1=%0d r2=%0d sched=%0d io=%0d prog=%0d cycles=%0d",
             n_fire[0], n_fire[1], n_fire[2], n_sched, n_io, n_prog, cyc);
    checks++;
    if (n_sched <= n_fire[0] + n_fire[1] + n_fire[2]) begin failures++; $display("FAIL no dependent rescheduling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
