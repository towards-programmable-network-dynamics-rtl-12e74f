// c_mem: species concentration memory (c-mem) of one chemical engine.
//
// One C_W-bit register per species, N_SPECIES + 1 locations. Location 0 is
// reserved and always holds 1 (the paper's reset value of the first
// position); it is never written, so an inactive stoichiometric record,
// which holds address 0, reads the multiplicative identity and changes
// nothing. All other locations reset to 0.
//
// Three write sources, one per cycle, in priority order:
//  * step_en: one step of a reaction firing. Each of the N_PSI hardware
//    logic slices names one species to decrement (sub_addr, reactant side)
//    and one to increment (add_addr, product side); every non-zero address
//    changes its register by one molecule, so a species named by several
//    slices moves by the net count in the same cycle.
//  * io_en: an external-event batch, IO_ADD adds io_amt, IO_SUBGE subtracts
//    io_amt only when the concentration is at least io_amt (io_ok tells).
//  * wr_en: a programming write of a new concentration value.
// Results saturate at 0 and 2^C_W - 1 (this design's choice; the paper does
// not say what happens at the limits). All concentrations are visible on c
// at all times, as the registers are wired straight to the selection logic.
module c_mem
  import chem_pkg::*;
#(
  parameter int unsigned N_SPECIES = N_SPECIES_D,
  parameter int unsigned C_W       = C_W_D,
  parameter int unsigned N_PSI     = N_PSI_D
) (
  input  logic            clk,
  input  logic            rst_n,
  // reaction firing step
  input  logic            step_en,
  input  logic [SA_W-1:0] sub_addr [N_PSI],
  input  logic [SA_W-1:0] add_addr [N_PSI],
  // external event batch
  input  logic            io_en,
  input  io_op_e          io_op,
  input  logic [SA_W-1:0] io_addr,
  input  logic [C_W-1:0]  io_amt,
  output logic            io_ok,
  // programming write
  input  logic            wr_en,
  input  logic [SA_W-1:0] wr_addr,
  input  logic [C_W-1:0]  wr_data,
  // concentrations
  output logic [C_W-1:0]  c [N_SPECIES+1]
);
  localparam int unsigned CNT_W = $clog2(N_PSI + 1) + 1;
  localparam logic [C_W:0] C_MAX = {1'b0, {C_W{1'b1}}};

  logic [C_W-1:0] io_cur;
  assign io_cur = (32'(io_addr) <= N_SPECIES) ? c[io_addr] : '0;
  assign io_ok  = (io_op == IO_ADD) || (io_cur >= io_amt);

  // next value of every species register for a reaction step
  logic [C_W-1:0] c_step [N_SPECIES+1];
  logic [C_W:0]   io_sum;

  always_comb begin
    c_step[0] = c[0];
    for (int s = 1; s <= N_SPECIES; s++) begin
      logic [CNT_W-1:0] nsub, nadd;
      logic signed [C_W+CNT_W:0] nv;
      nsub = '0;
      nadd = '0;
      for (int p = 0; p < N_PSI; p++) begin
        if (32'(sub_addr[p]) == s) nsub = nsub + 1'b1;
        if (32'(add_addr[p]) == s) nadd = nadd + 1'b1;
      end
      nv = $signed({{(CNT_W+1){1'b0}}, c[s]}) - $signed({{(C_W+1){1'b0}}, nsub})
         + $signed({{(C_W+1){1'b0}}, nadd});
      if (nv < 0)                                    c_step[s] = '0;
      else if (nv > $signed({{CNT_W{1'b0}}, C_MAX})) c_step[s] = '1;
      else                                           c_step[s] = nv[C_W-1:0];
    end
    io_sum = {1'b0, io_cur} + {1'b0, io_amt};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s <= N_SPECIES; s++) c[s] <= (s == 0) ? C_W'(1) : '0;
    end else if (step_en) begin
      for (int s = 1; s <= N_SPECIES; s++) c[s] <= c_step[s];
    end else if (io_en) begin
      if (io_addr != '0 && 32'(io_addr) <= N_SPECIES) begin
        if (io_op == IO_ADD)  c[io_addr] <= io_sum[C_W] ? '1 : io_sum[C_W-1:0];
        else if (io_ok)       c[io_addr] <= io_cur - io_amt;
      end
    end else if (wr_en) begin
      if (wr_addr != '0 && 32'(wr_addr) <= N_SPECIES) c[wr_addr] <= wr_data;
    end
  end
endmodule
