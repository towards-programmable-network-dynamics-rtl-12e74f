// stoich_mem: stoichiometric table (alpha-mem for reactants, beta-mem for
// products) of one chemical engine.
//
// A three-level table: reaction (N_REACT) -> reactant/product slot, one per
// hardware logic slice (N_PSI) -> order record (N_ORD). Each record holds a
// species address; 0 marks an inactive record. A species written into k
// records of one slot has coefficient k: 2 S3 + S2 is S3's address in two
// records of slot 0 and S2's address in one record of slot 1. The table is
// written one record at a time by the programming path, flat index
// (r * N_PSI + p) * N_ORD + o, and read in full (registers) by the update and
// selection logic. Reset clears every record (no reaction configured).
module stoich_mem
  import chem_pkg::*;
#(
  parameter int unsigned N_REACT = N_REACT_D,
  parameter int unsigned N_PSI   = N_PSI_D,
  parameter int unsigned N_ORD   = N_ORD_D
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [15:0]     wr_idx,
  input  logic [SA_W-1:0] wr_data,
  output logic [SA_W-1:0] rec [N_REACT][N_PSI][N_ORD]
);
  localparam int unsigned DEPTH = N_REACT * N_PSI * N_ORD;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REACT; r++)
        for (int p = 0; p < N_PSI; p++)
          for (int o = 0; o < N_ORD; o++)
            rec[r][p][o] <= '0;
    end else if (wr_en && 32'(wr_idx) < DEPTH) begin
      rec[32'(wr_idx) / (N_PSI * N_ORD)][(32'(wr_idx) / N_ORD) % N_PSI][32'(wr_idx) % N_ORD] <= wr_data;
    end
  end
endmodule
