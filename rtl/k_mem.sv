// k_mem: reaction coefficient bank (k-mem) of one chemical engine.
//
// N_REACT registers of K_W bits, each an IEEE-754 single-precision reaction
// coefficient in units of 1/clock cycle. Written one entry at a time by the
// programming path; all entries are visible to the scheduler. Reset loads
// 0.0, which makes every reaction's propensity zero until it is programmed.
module k_mem
  import chem_pkg::*;
#(
  parameter int unsigned N_REACT = N_REACT_D
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wr_en,
  input  logic [15:0]    wr_idx,
  input  logic [K_W-1:0] wr_data,
  output logic [K_W-1:0] k [N_REACT]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REACT; r++) k[r] <= FP_ZERO;
    end else if (wr_en && 32'(wr_idx) < N_REACT) begin
      k[$clog2(N_REACT)'(wr_idx)] <= wr_data;
    end
  end
endmodule
