// ac_engine: one Artificial Chemistry (AC) module, the chemical engine that
// runs one chemical algorithm.
//
// It holds the CA in memory-mapped tables (c-mem, alpha-mem, beta-mem,
// k-mem), one next-reaction-time register per reaction, the HLS update logic
// and one reaction scheduler (LoMA core), and sequences them. The control
// loop serves, one at a time and in this order of priority:
//   1. a programming write (prog_valid/prog_ready, one cycle): writing a
//      concentration marks its species changed; writing a record or a
//      coefficient marks its reaction for rescheduling;
//   2. an external-event batch (io_valid/io_ready, one cycle): add, or
//      conditional subtract (io_ok), on one species, marking it changed;
//   3. dependency marking (N_REACT cycles): every reaction with a reactant
//      record naming a changed species is marked for rescheduling;
//   4. rescheduling of the lowest marked reaction by the scheduler: its
//      propensity is stored, and its timer is loaded with 1/a if it has just
//      fired or was disabled (zero propensity or no time), otherwise with the
//      remaining time scaled by a_old/a_new;
//   5. firing of a due reaction (timer at 0), chosen round-robin starting
//      after the last one fired, so that reactions whose times both round
//      to zero cycles take turns instead of the lower one starving the
//      other: the update logic steps
//      through its records, the changed species are marked, the reaction is
//      marked for a fresh schedule and its timer is parked at T_NEVER - 1,
//      from where it keeps counting so the scheduling delay can be deducted.
// fire pulses, with fire_idx, when a reaction has finished executing.
// Time is counted in clock cycles; k values are per clock cycle.
//
// Follows the paper: the tables and their sizes, the addressing logic, the
// single LoMA core for all reactions of the reference implementation, the
// rescheduling of dependent reactions only and runtime reprogramming without
// stopping the engine. This design's choices: the order of priorities, round-robin
// choice among due reactions, the
// changed-species bit vector used to find dependent reactions, a reaction
// with no active record being disabled (propensity 0), and taking the cycles
// spent computing a schedule off the timer value loaded, so that the timer
// runs from the event that caused the reschedule.
module ac_engine
  import chem_pkg::*;
#(
  parameter int unsigned N_REACT   = N_REACT_D,
  parameter int unsigned N_PSI     = N_PSI_D,
  parameter int unsigned N_ORD     = N_ORD_D,
  parameter int unsigned N_SPECIES = N_SPECIES_D,
  parameter int unsigned C_W       = C_W_D
) (
  input  logic            clk,
  input  logic            rst_n,
  // programming (level-2 configuration)
  input  logic            prog_valid,
  input  prog_wr_t        prog_wr,
  output logic            prog_ready,
  // external-event batches
  input  logic            io_valid,
  input  io_op_e          io_op,
  input  logic [SA_W-1:0] io_addr,
  input  logic [C_W-1:0]  io_amt,
  output logic            io_ready,
  output logic            io_ok,
  // state
  output logic [C_W-1:0]  c [N_SPECIES+1],
  output logic            fire,
  output logic [$clog2(N_REACT)-1:0] fire_idx,
  output logic            sched_done
);
  localparam int unsigned RW = $clog2(N_REACT);
  localparam int unsigned NREC = N_REACT * N_PSI * N_ORD;

  typedef enum logic [2:0] {E_IDLE, E_DEP, E_SCHED_GO, E_SCHED, E_FIRE_GO, E_FIRE} est_e;
  est_e st;

  logic [SA_W-1:0] alpha [N_REACT][N_PSI][N_ORD];
  logic [SA_W-1:0] beta  [N_REACT][N_PSI][N_ORD];
  logic [31:0]     k     [N_REACT];
  logic [T_W-1:0]  t     [N_REACT];
  logic [N_REACT-1:0] due;
  logic [31:0]     a_reg [N_REACT];

  logic [N_SPECIES:0] dirty;
  logic [N_REACT-1:0] resched, fresh;
  logic [RW-1:0]      cur, dep_r;

  // ---------------------------------------------------------------- decode
  logic is_c, is_a, is_b, is_k;
  logic do_prog, do_io;
  assign do_prog = (st == E_IDLE) && prog_valid;
  assign do_io   = (st == E_IDLE) && !prog_valid && io_valid;
  assign is_c = do_prog && (prog_wr.tbl == TBL_C);
  assign is_a = do_prog && (prog_wr.tbl == TBL_ALPHA);
  assign is_b = do_prog && (prog_wr.tbl == TBL_BETA);
  assign is_k = do_prog && (prog_wr.tbl == TBL_K);
  assign prog_ready = do_prog;
  assign io_ready   = do_io;

  // ---------------------------------------------------------------- tables
  logic            step_en, upd_busy, upd_done, upd_go;
  logic [SA_W-1:0] sub_addr [N_PSI];
  logic [SA_W-1:0] add_addr [N_PSI];

  c_mem #(.N_SPECIES(N_SPECIES), .C_W(C_W), .N_PSI(N_PSI)) u_cmem (
    .clk, .rst_n, .step_en, .sub_addr, .add_addr,
    .io_en(do_io), .io_op, .io_addr, .io_amt, .io_ok,
    .wr_en(is_c), .wr_addr(prog_wr.idx[SA_W-1:0]), .wr_data(prog_wr.data[C_W-1:0]),
    .c);

  stoich_mem #(.N_REACT(N_REACT), .N_PSI(N_PSI), .N_ORD(N_ORD)) u_amem (
    .clk, .rst_n, .wr_en(is_a), .wr_idx(prog_wr.idx), .wr_data(prog_wr.data[SA_W-1:0]), .rec(alpha));
  stoich_mem #(.N_REACT(N_REACT), .N_PSI(N_PSI), .N_ORD(N_ORD)) u_bmem (
    .clk, .rst_n, .wr_en(is_b), .wr_idx(prog_wr.idx), .wr_data(prog_wr.data[SA_W-1:0]), .rec(beta));
  k_mem #(.N_REACT(N_REACT)) u_kmem (
    .clk, .rst_n, .wr_en(is_k), .wr_idx(prog_wr.idx), .wr_data(prog_wr.data), .k);

  // ---------------------------------------------------------------- timers
  logic           t_load;
  logic [T_W-1:0] t_val;
  reaction_timers #(.N_REACT(N_REACT)) u_timers (
    .clk, .rst_n, .load_en(t_load), .load_idx(cur), .load_val(t_val), .t, .due);

  // ---------------------------------------------------------------- update
  update_logic #(.N_PSI(N_PSI), .N_ORD(N_ORD)) u_upd (
    .clk, .rst_n, .exe_react(upd_go), .alpha_r(alpha[cur]), .beta_r(beta[cur]),
    .busy(upd_busy), .step_en, .sub_addr, .add_addr, .done(upd_done));
  assign upd_go = (st == E_FIRE_GO);

  // ---------------------------------------------------------------- scheduler
  logic [$clog2(N_PSI)-1:0] rd_addr;
  logic [$clog2(N_ORD)-1:0] rd_ord;
  logic [C_W-1:0] c_sel;
  logic [31:0]    a_new, k_cur;
  logic [T_W-1:0] t_out;
  logic           s_rdy, s_busy, s_go, s_fresh;
  logic [N_REACT-1:0] active;

  always_comb
    for (int r = 0; r < N_REACT; r++) begin
      active[r] = 1'b0;
      for (int p = 0; p < N_PSI; p++)
        for (int o = 0; o < N_ORD; o++)
          if (alpha[r][p][o] != '0 || beta[r][p][o] != '0) active[r] = 1'b1;
    end

  propensity_select #(.N_REACT(N_REACT), .N_PSI(N_PSI), .N_ORD(N_ORD),
                      .N_SPECIES(N_SPECIES), .C_W(C_W)) u_psel (
    .alpha, .c, .r_sel(cur), .rd_addr, .rd_ord, .c_out(c_sel));

  assign k_cur   = active[cur] ? k[cur] : FP_ZERO;
  assign s_go    = (st == E_SCHED_GO);
  assign s_fresh = fresh[cur] || (a_reg[cur][30:0] == 31'd0) || (t[cur] == T_NEVER);

  // Time that passed while the new schedule was being worked out, taken off
  // the result so that the wait between events is 1/a and not 1/a plus the
  // scheduling latency. A fired reaction's timer is parked at T_NEVER - 1 and
  // keeps counting, so its age since the firing is (T_NEVER - 1) - t; for a
  // rescaled reaction it is the count since t_left was sampled.
  logic [T_W-1:0] t_start, elapsed, t_adj;
  always_comb begin
    if (t[cur] == T_NEVER)        elapsed = '0;
    else if (fresh[cur])          elapsed = (T_NEVER - 1'b1) - t[cur];
    else if (s_fresh)             elapsed = '0;
    else                          elapsed = t_start - t[cur];
    if (t_out == T_NEVER)         t_adj = T_NEVER;
    else if (t_out > elapsed)     t_adj = t_out - elapsed;
    else                          t_adj = '0;
  end

  reaction_scheduler #(.N_PSI(N_PSI), .N_ORD(N_ORD), .C_W(C_W)) u_sched (
    .clk, .rst_n, .op_nd(s_go), .fresh(s_fresh), .k(k_cur), .a_old(a_reg[cur]),
    .t_left(t_start), .c_in(c_sel), .rd_addr, .rd_ord, .busy(s_busy),
    .a_new, .t_out, .rdy(s_rdy));

  // ---------------------------------------------------------------- control
  function automatic logic [RW-1:0] lowest(input logic [N_REACT-1:0] v);
    lowest = '0;
    for (int i = N_REACT - 1; i >= 0; i--) if (v[i]) lowest = RW'(i);
  endfunction

  // first set bit of v at or after position start, wrapping around
  function automatic logic [RW-1:0] next_from(input logic [N_REACT-1:0] v, input logic [RW-1:0] start);
    next_from = '0;
    for (int i = 2 * N_REACT - 1; i >= 0; i--)
      if (i >= 32'(start) && v[i % N_REACT]) next_from = RW'(i % N_REACT);
  endfunction

  logic [RW-1:0] rr_next;   // round-robin start for the next firing
  logic dep_hit;
  always_comb begin
    dep_hit = 1'b0;
    for (int p = 0; p < N_PSI; p++)
      for (int o = 0; o < N_ORD; o++)
        if (alpha[dep_r][p][o] != '0 && 32'(alpha[dep_r][p][o]) <= N_SPECIES &&
            dirty[alpha[dep_r][p][o]])
          dep_hit = 1'b1;
  end

  assign t_load = (st == E_SCHED && s_rdy) || (st == E_FIRE && upd_done);
  assign t_val  = (st == E_SCHED) ? t_adj : T_NEVER - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; cur <= '0; dep_r <= '0;
      dirty <= '0; resched <= '0; fresh <= '0;
      for (int r = 0; r < N_REACT; r++) a_reg[r] <= FP_ZERO;
      fire <= 1'b0; fire_idx <= '0; sched_done <= 1'b0; rr_next <= '0; t_start <= '0;
    end else begin
      fire <= 1'b0;
      sched_done <= 1'b0;
      case (st)
        E_IDLE: begin
          if (do_prog) begin
            if (is_c && prog_wr.idx != 16'd0 && 32'(prog_wr.idx) <= N_SPECIES)
              dirty[prog_wr.idx[SA_W-1:0]] <= 1'b1;
            if ((is_a || is_b) && 32'(prog_wr.idx) < NREC)
              resched[32'(prog_wr.idx) / (N_PSI * N_ORD)] <= 1'b1;
            if (is_k && 32'(prog_wr.idx) < N_REACT)
              resched[prog_wr.idx[RW-1:0]] <= 1'b1;
          end else if (do_io) begin
            if (io_addr != '0 && 32'(io_addr) <= N_SPECIES && io_ok)
              dirty[io_addr] <= 1'b1;
          end else if (|dirty) begin
            dep_r <= '0;
            st    <= E_DEP;
          end else if (|resched) begin
            cur <= lowest(resched);
            st  <= E_SCHED_GO;
          end else if (|(due & active)) begin
            cur <= next_from(due & active, rr_next);
            st  <= E_FIRE_GO;
          end
        end
        E_DEP: begin
          if (dep_hit) resched[dep_r] <= 1'b1;
          if (32'(dep_r) == N_REACT - 1) begin
            dirty <= '0;
            st    <= E_IDLE;
          end else begin
            dep_r <= dep_r + 1'b1;
          end
        end
        E_SCHED_GO: begin t_start <= t[cur]; st <= E_SCHED; end
        E_SCHED: if (s_rdy) begin
          a_reg[cur]   <= a_new;
          resched[cur] <= 1'b0;
          fresh[cur]   <= 1'b0;
          sched_done   <= 1'b1;
          st           <= E_IDLE;
        end
        E_FIRE_GO: st <= E_FIRE;
        E_FIRE: begin
          if (step_en)
            for (int p = 0; p < N_PSI; p++) begin
              if (sub_addr[p] != '0 && 32'(sub_addr[p]) <= N_SPECIES) dirty[sub_addr[p]] <= 1'b1;
              if (add_addr[p] != '0 && 32'(add_addr[p]) <= N_SPECIES) dirty[add_addr[p]] <= 1'b1;
            end
          if (upd_done) begin
            resched[cur] <= 1'b1;
            fresh[cur]   <= 1'b1;
            fire         <= 1'b1;
            fire_idx     <= cur;
            rr_next      <= (32'(cur) == N_REACT - 1) ? '0 : cur + 1'b1;
            st           <= E_IDLE;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // a reaction is only fired when the scheduler is idle
  a_fire_idle: assert property (@(posedge clk) disable iff (!rst_n) upd_go |-> !s_busy);
endmodule
