// propensity_select: concentration selection for the propensity computation.
//
// Given a reaction (r_sel), a reactant slot (rd_addr, one HLS) and an order
// record (rd_ord), outputs the concentration of the species the record
// addresses, or the identity value 1 when the record is inactive (address 0).
// Multiplying the outputs over all records of a reaction gives the
// mass-action product of c_s^alpha_rs. Purely combinational: the value is
// valid in the cycle its indices are applied.
//
// Follows the paper's figure of decoders driving a multiplexer per HLS with a
// constant identity input; here the decoder and multiplexer collapse into one
// indexed read, and the scheduler steps through the records one at a time.
module propensity_select
  import chem_pkg::*;
#(
  parameter int unsigned N_REACT   = N_REACT_D,
  parameter int unsigned N_PSI     = N_PSI_D,
  parameter int unsigned N_ORD     = N_ORD_D,
  parameter int unsigned N_SPECIES = N_SPECIES_D,
  parameter int unsigned C_W       = C_W_D
) (
  input  logic [SA_W-1:0] alpha [N_REACT][N_PSI][N_ORD],
  input  logic [C_W-1:0]  c     [N_SPECIES+1],
  input  logic [$clog2(N_REACT)-1:0] r_sel,
  input  logic [$clog2(N_PSI)-1:0]   rd_addr,
  input  logic [$clog2(N_ORD)-1:0]   rd_ord,
  output logic [C_W-1:0]  c_out
);
  logic [SA_W-1:0] a;
  always_comb begin
    a = alpha[r_sel][rd_addr][rd_ord];
    if (a == '0 || 32'(a) > N_SPECIES) c_out = C_W'(1);
    else                               c_out = c[a];
  end
endmodule
