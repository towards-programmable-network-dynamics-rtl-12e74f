`timescale 1ns/1ps
// tb_workloads: the evaluated reaction networks on one engine of default size.
//
// One ac_engine with every parameter at its default (8 reactions, 8 x 8
// records, 255 species, 16-bit counts) is loaded through its programming
// port. A host model acts as the event mapper: it removes a molecule of the
// output species P whenever one is there (one packet sent) and otherwise adds
// a molecule of the input species S, keeping a backlog of BACKLOG molecules,
// so the engine is never short of work. Three runs:
//  1. Rnet2 (S -> P) with a large k: the engine itself is the bottleneck. At
//     80 MHz and one molecule per kilobyte, the reference implementation
//     handles about 1.6 Gbit/s with one reaction, i.e. one packet every
//     400 cycles; this engine must do at least as well;
//  2. Rnet1 (S + E -> ES, ES -> E + P) with e0 = 25,000 enzyme molecules and
//     large rate constants: engine-bound again, the reference figure for two
//     reactions is about 800 Mbit/s, one packet every 800 cycles;
//  3. Rnet1 with e0 = 25,000 and a small k2, so that the rate cap k2 * e0
//     (one packet per 1000 cycles) is below the engine's own limit; the run
//     starts with all enzyme bound (ES = 25,000, E = 0), since reaching that
//     state from E = 25,000 would take 25,000 packets. The measured rate must
//     be close to the cap, and E + ES must stay 25,000.
// The measured cycles per packet are printed for each run.
module tb_workloads;
  import chem_pkg::*;
  localparam int S = 1, E = 2, ES = 3, P = 4, BACKLOG = 20, NPKT = 200;
  logic clk = 0, rst_n = 0;
  logic prog_valid = 0, prog_ready;
  prog_wr_t prog_wr = '0;
  logic io_valid = 0, io_ready, io_ok;
  io_op_e io_op = IO_ADD;
  logic [SA_W-1:0] io_addr = 0;
  logic [C_W_D-1:0] io_amt = 0;
  logic [C_W_D-1:0] c [N_SPECIES_D+1];
  logic fire, sched_done;
  logic [2:0] fire_idx;
  int checks = 0, failures = 0;
  longint cyc = 0;

  ac_engine dut (.*);
  always #6.25 clk = ~clk;
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

  task automatic prog(input tbl_e tbl, input int idx, input logic [31:0] data);
    @(negedge clk);
    prog_wr.ac = 0; prog_wr.tbl = tbl; prog_wr.idx = 16'(idx); prog_wr.data = data;
    prog_valid = 1;
    do @(posedge clk); while (!prog_ready);
    @(negedge clk); prog_valid = 0;
  endtask

  task automatic io(input io_op_e op, input int addr);
    @(negedge clk);
    io_op = op; io_addr = SA_W'(addr); io_amt = 1; io_valid = 1;
    #1;
    while (!io_ready) begin @(negedge clk); #1; end
    @(negedge clk); io_valid = 0;
  endtask

  task automatic rec(input tbl_e tbl, input int r, input int p, input int sp);
    prog(tbl, (r * N_PSI_D + p) * N_ORD_D, 32'(sp));
  endtask

  task automatic clear();
    for (int i = 0; i < N_REACT_D * N_PSI_D * N_ORD_D; i++) begin
      if (i % N_ORD_D == 0) begin prog(TBL_ALPHA, i, 0); prog(TBL_BETA, i, 0); end
    end
    for (int s = 1; s <= 4; s++) prog(TBL_C, s, 0);
  endtask

  // serve the engine for NPKT packets; returns cycles per packet
  task automatic run(output real cpp);
    int sent, s_in;
    longint t0;
    sent = 0; s_in = 0;
    t0 = cyc;
    while (sent < NPKT) begin
      if (c[P] != 0) begin io(IO_SUBGE, P); sent++; end
      else if (int'(c[S]) < BACKLOG) io(IO_ADD, S);
      else @(negedge clk);
    end
    cpp = real'(cyc - t0) / real'(NPKT);
  endtask

  initial begin
    real cpp;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);

    // 1. Rnet2, engine-bound
    rec(TBL_ALPHA, 0, 0, S);
    rec(TBL_BETA,  0, 0, P);
    prog(TBL_K, 0, r2f(1.0));
    run(cpp);
    $display("Rnet2 engine-bound: %0.1f cycles per packet (reference 400)", cpp);
    checks++;
    if (cpp > 400.0) begin failures++; $display("FAIL Rnet2 slower than reference"); end

    // 2. Rnet1, e0 = 25000, engine-bound
    clear();
    rec(TBL_ALPHA, 0, 0, S);
    rec(TBL_ALPHA, 0, 1, E);
    rec(TBL_BETA,  0, 0, ES);
    rec(TBL_ALPHA, 1, 0, ES);
    rec(TBL_BETA,  1, 0, E);
    rec(TBL_BETA,  1, 1, P);
    prog(TBL_K, 0, r2f(1.0));
    prog(TBL_K, 1, r2f(1.0));
    prog(TBL_C, E, 25000);
    run(cpp);
    $display("Rnet1 engine-bound: %0.1f cycles per packet (reference 800)", cpp);
    checks += 2;
    if (cpp > 800.0) begin failures++; $display("FAIL Rnet1 slower than reference"); end
    if (int'(c[E]) + int'(c[ES]) != 25000) begin failures++; $display("FAIL enzyme total %0d", int'(c[E]) + int'(c[ES])); end

    // 3. Rnet1, e0 = 25000, cap k2 * e0 = 1e-3 per cycle
    // start saturated (all enzyme bound): the cap holds once ES ~ e0
    prog(TBL_K, 1, r2f(4.0e-8));
    prog(TBL_C, E, 0);
    prog(TBL_C, ES, 25000);
    run(cpp);
    $display("Rnet1 rate-limited: %0.1f cycles per packet (cap 1000)", cpp);
    checks += 2;
    if (cpp < 0.9 * 1000.0 || cpp > 1.3 * 1000.0) begin failures++; $display("FAIL rate cap not held"); end
    if (int'(c[E]) + int'(c[ES]) != 25000) begin failures++; $display("FAIL enzyme total %0d", int'(c[E]) + int'(c[ES])); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
