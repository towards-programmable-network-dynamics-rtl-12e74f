`timescale 1ns/1ps
// tb_reaction_scheduler: self-checking test of the LoMA core.
//
// The concentration selection is modelled by a table indexed by the core's
// reactant and order counters. For random concentrations, coefficients,
// previous propensities and remaining times, the propensity and the next
// reaction time are computed in the testbench with real arithmetic and
// compared with the core's results (relative tolerance for the truncating
// FP units). Covered: the fresh path 1/a, the rescaling path t*a_old/a_new,
// zero propensity (never), and the number of cycles from op_nd to rdy.
module tb_reaction_scheduler;
  import chem_pkg::*;
  localparam int NP = 4, NO = 2;
  logic clk = 0, rst_n = 0, op_nd = 0, fresh = 0;
  logic [31:0] k, a_old, a_new;
  logic [T_W-1:0] t_left, t_out;
  logic [15:0] c_in;
  logic [1:0] rd_addr;
  logic [0:0] rd_ord;
  logic busy, rdy;
  logic [15:0] conc [NP][NO];
  int checks = 0, failures = 0;
  int n_fresh = 0, n_rescale = 0, n_never = 0;

  reaction_scheduler #(.N_PSI(NP), .N_ORD(NO), .C_W(16)) dut (.*);
  assign c_in = conc[rd_addr][rd_ord];
  always #5 clk = ~clk;
  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real f2r(input logic [31:0] f);
    real m; int e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    if (e >= 0) m = m * real'(64'd1 << e);
    else        m = m / real'(64'd1 << (-e));
    return f[31] ? -m : m;
  endfunction

  // random float in [2^lo, 2^hi)
  function automatic logic [31:0] rnd_f(input int lo, input int hi);
    return {1'b0, 8'(127 + lo + int'($urandom_range(0, hi - lo - 1))), 23'($urandom)};
  endfunction

  task automatic check_rel(input string what, input real got, input real exp_v, input real tol);
    real err;
    checks++;
    err = (exp_v == 0.0) ? ((got == 0.0) ? 0.0 : 1.0) : (got - exp_v) / exp_v;
    if (err < 0) err = -err;
    if (err > tol) begin failures++; $display("FAIL %s got %g exp %g", what, got, exp_v); end
  endtask

  initial begin
    k = 0; a_old = 0; t_left = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      real prod, a_exp, t_exp;
      int cyc;
      bit zero;
      zero = ($urandom_range(0, 9) == 0);
      prod = 1.0;
      for (int p = 0; p < NP; p++) for (int o = 0; o < NO; o++) begin
        int v;
        v = ($urandom_range(0, 2) == 0) ? 1 : $urandom_range(1, 300);
        if (zero && p == 1 && o == 0) v = 0;
        conc[p][o] = 16'(v);
        prod = prod * v;
      end
      k      = rnd_f(-30, -5);
      a_old  = ($urandom_range(0, 1) == 0) ? rnd_f(-20, 5) : 32'd0;
      fresh  = ($urandom_range(0, 1) == 0);
      t_left = T_W'($urandom_range(1, 1000000));
      a_exp  = f2r(k) * prod;
      @(negedge clk); op_nd = 1; @(negedge clk); op_nd = 0;
      cyc = 1;
      while (!rdy && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2 * (NP * NO + 1) + 32) begin failures++; $display("FAIL latency %0d", cyc); end
      check_rel("a_new", f2r(a_new), a_exp, 1e-5);
      if (a_exp == 0.0) begin
        n_never++;
        checks++;
        if (t_out != T_NEVER) begin failures++; $display("FAIL zero propensity t_out=%0d", t_out); end
      end else begin
        if (fresh) begin t_exp = 1.0 / a_exp; n_fresh++; end
        else       begin t_exp = real'(t_left) * f2r(a_old) / a_exp; n_rescale++; end
        if (t_exp >= 4294967295.0) begin
          checks++;
          if (t_out != T_NEVER) begin failures++; $display("FAIL saturation t_out=%0d t_exp=%g a=%h aold=%h q1=%h q2=%h fresh=%0d", t_out, t_exp, a_new, a_old, dut.q1, dut.q2, fresh); end
        end else begin
          real tol;
          tol = (t_exp * 1e-5 > 1.01) ? t_exp * 1e-5 : 1.01;
          checks++;
          if (real'(t_out) > t_exp + tol || real'(t_out) < t_exp - tol) begin
            failures++; $display("FAIL t_out %0d exp %g", t_out, t_exp);
          end
        end
      end
    end
    checks++;
    if (n_fresh == 0 || n_rescale == 0 || n_never == 0) begin failures++; $display("FAIL coverage"); end
    $display("fresh=%0d rescale=%0d never=%0d", n_fresh, n_rescale, n_never);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
