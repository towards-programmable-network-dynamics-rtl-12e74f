// chem_manager: top of the chemical middleware. The manager module hosting
// NUM_AC chemical engines.
//
// The manager connects the outside world to the engines:
//  * program: configuration frames on uart_rx (prog_decoder) become writes
//    into the tables of the engine they name (tables 0-3) or into the
//    manager's own I/O maps and monitor settings (tables 8-11);
//  * ext. input / ext. output: event lines ev_in / ev_out are mapped to
//    batch updates of chosen species (io_mapper);
//  * monitor: selected concentrations are logged periodically on uart_tx.
// Each engine (ac_engine) runs its chemical algorithm independently and can
// be reprogrammed while it runs. All logic runs on the single clock clk with
// an active-low asynchronous reset rst_n.
//
// Follows the paper's block diagram: a manager around one or more AC modules,
// clock, event inputs and outputs, and 9600-baud monitor and program links.
// The default NUM_AC = 1 is the single engine of the reference
// implementation. Frame formats, channel counts and the I/O handshake are
// this design's own (see the modules).
module chem_manager
  import chem_pkg::*;
#(
  parameter int unsigned NUM_AC    = 1,
  parameter int unsigned N_REACT   = N_REACT_D,
  parameter int unsigned N_PSI     = N_PSI_D,
  parameter int unsigned N_ORD     = N_ORD_D,
  parameter int unsigned N_SPECIES = N_SPECIES_D,
  parameter int unsigned C_W       = C_W_D,
  parameter int unsigned N_IN      = 4,
  parameter int unsigned N_OUT     = 4,
  parameter int unsigned N_MON     = 4,
  parameter int unsigned OUT_PULSE = 8,
  parameter int unsigned BAUD_DIV  = 8333
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             uart_rx,
  output logic             uart_tx,
  input  logic [N_IN-1:0]  ev_in,
  output logic [N_OUT-1:0] ev_out
);
  // programming
  logic     wr_valid, wr_ready;
  prog_wr_t wr;
  logic [15:0] frames;
  logic [NUM_AC-1:0] ac_prog_valid, ac_prog_ready;
  logic     mgr_tbl;

  prog_decoder #(.BAUD_DIV(BAUD_DIV)) u_prog (
    .clk, .rst_n, .rx(uart_rx), .wr_valid, .wr, .wr_ready, .frames);

  assign mgr_tbl = wr.tbl[3];
  always_comb begin
    ac_prog_valid = '0;
    if (wr_valid && !mgr_tbl && 32'(wr.ac) < NUM_AC) ac_prog_valid[wr.ac] = 1'b1;
  end
  assign wr_ready = mgr_tbl || (32'(wr.ac) >= NUM_AC) ||
                    ((32'(wr.ac) < NUM_AC) && ac_prog_ready[(32'(wr.ac) < NUM_AC) ? wr.ac : '0]);

  // engine I/O
  logic [NUM_AC-1:0] io_valid, io_ready, io_ok;
  io_op_e            io_op;
  logic [SA_W-1:0]   io_addr;
  logic [C_W-1:0]    io_amt, io_c;
  logic [3:0]        io_ac;
  logic [15:0]       in_events, out_events;

  // monitor
  logic [3:0]      mon_ac;
  logic [SA_W-1:0] mon_addr;
  logic [C_W-1:0]  mon_c;
  logic [15:0]     reports;

  logic [C_W-1:0]  c [NUM_AC][N_SPECIES+1];
  logic [NUM_AC-1:0] fire, sched_done;
  logic [$clog2(N_REACT)-1:0] fire_idx [NUM_AC];

  for (genvar a = 0; a < NUM_AC; a++) begin : g_ac
    ac_engine #(.N_REACT(N_REACT), .N_PSI(N_PSI), .N_ORD(N_ORD),
                .N_SPECIES(N_SPECIES), .C_W(C_W)) u_ac (
      .clk, .rst_n,
      .prog_valid(ac_prog_valid[a]), .prog_wr(wr), .prog_ready(ac_prog_ready[a]),
      .io_valid(io_valid[a]), .io_op, .io_addr, .io_amt,
      .io_ready(io_ready[a]), .io_ok(io_ok[a]),
      .c(c[a]), .fire(fire[a]), .fire_idx(fire_idx[a]), .sched_done(sched_done[a]));
  end

  always_comb begin
    io_c  = '0;
    mon_c = '0;
    if (32'(io_ac) < NUM_AC && 32'(io_addr) <= N_SPECIES)   io_c  = c[io_ac][io_addr];
    if (32'(mon_ac) < NUM_AC && 32'(mon_addr) <= N_SPECIES) mon_c = c[mon_ac][mon_addr];
  end

  io_mapper #(.NUM_AC(NUM_AC), .N_IN(N_IN), .N_OUT(N_OUT), .OUT_PULSE(OUT_PULSE), .C_W(C_W)) u_io (
    .clk, .rst_n, .cfg_valid(wr_valid && mgr_tbl), .cfg(wr), .ev_in, .ev_out,
    .io_valid, .io_op, .io_addr, .io_amt, .io_ac, .io_ready, .io_ok, .io_c,
    .in_events, .out_events);

  monitor #(.BAUD_DIV(BAUD_DIV), .N_MON(N_MON), .C_W(C_W)) u_mon (
    .clk, .rst_n, .cfg_valid(wr_valid && mgr_tbl), .cfg(wr),
    .mon_ac, .mon_addr, .mon_c, .tx(uart_tx), .reports);
endmodule
