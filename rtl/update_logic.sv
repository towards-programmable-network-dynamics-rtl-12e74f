// update_logic: concentration addressing logic of the hardware logic slices
// (HLS) for executing one reaction.
//
// On exe_react the reaction's reactant (alpha) and product (beta) records are
// taken from the inputs, which must stay stable while busy. A step-down
// counter starts at the highest order index that holds an active record in
// any slot and counts to 0; in each step every HLS p presents the species
// address of its record at the current order index, alpha on sub_addr[p] and
// beta on add_addr[p], with step_en high, so that c_mem removes one molecule
// of each named reactant and adds one of each named product. A second-order
// reactant therefore loses two molecules in two steps while the first-order
// reactants of the same reaction are all handled in the first step. done
// pulses with the last step. An empty reaction still takes one step.
//
// Follows the paper: one HLS per reactant, one decoder per order record,
// records read in sequence by a step-down counter, subtraction for
// reactants and addition for products. This design's choice: reactants and
// products are handled in the same steps, and the counter starts at the
// highest active record rather than always at N_ORD - 1.
module update_logic
  import chem_pkg::*;
#(
  parameter int unsigned N_PSI = N_PSI_D,
  parameter int unsigned N_ORD = N_ORD_D
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            exe_react,
  input  logic [SA_W-1:0] alpha_r [N_PSI][N_ORD],
  input  logic [SA_W-1:0] beta_r  [N_PSI][N_ORD],
  output logic            busy,
  output logic            step_en,
  output logic [SA_W-1:0] sub_addr [N_PSI],
  output logic [SA_W-1:0] add_addr [N_PSI],
  output logic            done
);
  localparam int unsigned OW = (N_ORD > 1) ? $clog2(N_ORD) : 1;
  logic [OW-1:0] cnt, top;

  // highest order index holding an active record
  always_comb begin
    top = '0;
    for (int o = 0; o < N_ORD; o++)
      for (int p = 0; p < N_PSI; p++)
        if (alpha_r[p][o] != '0 || beta_r[p][o] != '0) top = OW'(o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (!busy) begin
      if (exe_react) begin
        busy <= 1'b1;
        cnt  <= top;
      end
    end else begin
      if (cnt == '0) busy <= 1'b0;
      else           cnt  <= cnt - 1'b1;
    end
  end

  assign step_en = busy;
  assign done    = busy && (cnt == '0);

  always_comb
    for (int p = 0; p < N_PSI; p++) begin
      sub_addr[p] = busy ? alpha_r[p][cnt] : '0;
      add_addr[p] = busy ? beta_r[p][cnt]  : '0;
    end
endmodule
