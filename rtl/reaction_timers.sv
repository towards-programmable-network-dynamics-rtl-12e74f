// reaction_timers: next-reaction-time registers, one per reaction.
//
// Each register holds the number of clock cycles left until its reaction
// fires. Registers count down by one per cycle; a register at 0 stays there
// and raises its due bit until it is reloaded; the all-ones value T_NEVER
// stands for "never" and does not count. The scheduler reloads one register
// at a time (load_en, load_idx, load_val), the load taking precedence over the
// count. Reset sets every register to T_NEVER. The time unit of one clock
// cycle is this design's choice.
module reaction_timers
  import chem_pkg::*;
#(
  parameter int unsigned N_REACT = N_REACT_D
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load_en,
  input  logic [$clog2(N_REACT)-1:0] load_idx,
  input  logic [T_W-1:0]     load_val,
  output logic [T_W-1:0]     t   [N_REACT],
  output logic [N_REACT-1:0] due
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REACT; r++) t[r] <= T_NEVER;
    end else begin
      for (int r = 0; r < N_REACT; r++) begin
        if (load_en && 32'(load_idx) == r)       t[r] <= load_val;
        else if (t[r] != T_NEVER && t[r] != '0)  t[r] <= t[r] - 1'b1;
      end
    end
  end

  always_comb
    for (int r = 0; r < N_REACT; r++) due[r] = (t[r] == '0);
endmodule
