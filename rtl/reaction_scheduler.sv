// reaction_scheduler: the LoMA core. Computes a reaction's propensity and its
// next reaction time.
//
// On op_nd the core
//  1. starts an accumulator at 1.0 (mux1) and, stepping a reactant counter
//     (rd_addr, the "Cnt" of the schematic) and an order counter (rd_ord)
//     over all N_PSI x N_ORD records, multiplies it by each selected
//     concentration c_in after int16-to-float conversion (fMult1). The
//     selection logic must return c_in combinationally for the indices shown;
//  2. multiplies the product by the reaction coefficient k (fMult1 again),
//     giving the new propensity a_new = k * prod c_s^alpha_rs;
//  3. divides in parallel 1.0 / a_new (fDiv1) and a_old / a_new (fDiv2);
//  4. multiplies a_old / a_new by the remaining time t_left converted to float
//     (intTof, fMult2);
//  5. selects (mux2, by fresh) 1 / a_new for a reaction that has just fired or
//     was disabled, or the rescaled t_left * a_old / a_new for a reaction
//     whose reactants changed, and converts it to an integer (floatToInt).
// rdy pulses with a_new and t_out valid. A zero propensity (divide by zero)
// gives t_out = T_NEVER. Inputs must be held while the core is busy.
//
// Timing: two cycles per multiplication, so rdy comes 2 * (N_PSI*N_ORD + 1) + 32
// cycles after op_nd; 162 cycles at the default 8 x 8 records.
//
// Follows the paper: single-precision floating point, one iterative multiplier
// for the concentration product and k, two multipliers, two dividers, two
// multiplexers, one counter and the a_old/k/c_in/t_left/a_new/t_out signals
// of the schematic. This design's choices: the order counter next to the
// printed 3-bit reactant counter, every record multiplied (inactive ones by
// 1), the next reaction time taken as the mean 1/a (no random draw appears in
// the paper), time in clock cycles, and the simple FP units of fp_mul/fp_div.
module reaction_scheduler
  import chem_pkg::*;
#(
  parameter int unsigned N_PSI = N_PSI_D,
  parameter int unsigned N_ORD = N_ORD_D,
  parameter int unsigned C_W   = C_W_D
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       op_nd,
  input  logic                       fresh,
  input  logic [31:0]                k,
  input  logic [31:0]                a_old,
  input  logic [T_W-1:0]             t_left,
  input  logic [C_W-1:0]             c_in,
  output logic [$clog2(N_PSI)-1:0]   rd_addr,
  output logic [$clog2(N_ORD)-1:0]   rd_ord,
  output logic                       busy,
  output logic [31:0]                a_new,
  output logic [T_W-1:0]             t_out,
  output logic                       rdy
);
  typedef enum logic [3:0] {
    S_IDLE, S_MC_ISS, S_MC_WAIT, S_MK_ISS, S_MK_WAIT,
    S_DIV_ISS, S_DIV_WAIT, S_MT_ISS, S_MT_WAIT, S_OUT
  } st_e;
  st_e st;

  logic [31:0] acc, c_f, t_f, m1_a, m1_b, m1_y, m2_y, d1_y, d2_y, q1, q2, sel, sel_i;
  logic        m1_go, m1_rdy, m2_go, m2_rdy, d_go, d1_rdy, d2_rdy, d1_z, d2_z, zero;
  logic        d1_done, d2_done;

  int_to_float #(.W(C_W)) u_int16tof (.a(c_in),   .y(c_f));
  int_to_float #(.W(T_W)) u_inttof   (.a(t_left), .y(t_f));

  // mux1: accumulator input for the concentration steps, k for the last one
  assign m1_a = acc;
  assign m1_b = (st == S_MK_ISS) ? k : c_f;
  assign m1_go = (st == S_MC_ISS) || (st == S_MK_ISS);

  fp_mul u_fmult1 (.clk, .rst_n, .op_nd(m1_go), .a(m1_a), .b(m1_b), .y(m1_y), .rdy(m1_rdy));
  assign d_go = (st == S_DIV_ISS);
  fp_div u_fdiv1 (.clk, .rst_n, .op_nd(d_go), .a(FP_ONE), .b(a_new), .y(d1_y), .rdy(d1_rdy), .div0(d1_z));
  fp_div u_fdiv2 (.clk, .rst_n, .op_nd(d_go), .a(a_old),  .b(a_new), .y(d2_y), .rdy(d2_rdy), .div0(d2_z));
  assign m2_go = (st == S_MT_ISS);
  fp_mul u_fmult2 (.clk, .rst_n, .op_nd(m2_go), .a(q2), .b(t_f), .y(m2_y), .rdy(m2_rdy));

  // mux2 and floatToInt
  assign sel = fresh ? q1 : m2_y;
  float_to_int u_floattoint (.a(sel), .y(sel_i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; acc <= FP_ONE; rd_addr <= '0; rd_ord <= '0;
      a_new <= FP_ZERO; t_out <= T_NEVER; rdy <= 1'b0;
      q1 <= FP_ZERO; q2 <= FP_ZERO; zero <= 1'b0; d1_done <= 1'b0; d2_done <= 1'b0;
    end else begin
      rdy <= 1'b0;
      case (st)
        S_IDLE: if (op_nd) begin
          acc <= FP_ONE; rd_addr <= '0; rd_ord <= '0; st <= S_MC_ISS;
        end
        S_MC_ISS:  st <= S_MC_WAIT;
        S_MC_WAIT: if (m1_rdy) begin
          acc <= m1_y;
          if (32'(rd_ord) == N_ORD - 1) begin
            rd_ord <= '0;
            if (32'(rd_addr) == N_PSI - 1) begin
              rd_addr <= '0;
              st <= S_MK_ISS;
            end else begin
              rd_addr <= rd_addr + 1'b1;
              st <= S_MC_ISS;
            end
          end else begin
            rd_ord <= rd_ord + 1'b1;
            st <= S_MC_ISS;
          end
        end
        S_MK_ISS:  st <= S_MK_WAIT;
        S_MK_WAIT: if (m1_rdy) begin
          a_new <= m1_y;
          st <= S_DIV_ISS;
        end
        S_DIV_ISS: begin
          d1_done <= 1'b0; d2_done <= 1'b0; st <= S_DIV_WAIT;
        end
        S_DIV_WAIT: begin
          if (d1_rdy) begin q1 <= d1_y; zero <= d1_z; d1_done <= 1'b1; end
          if (d2_rdy) begin q2 <= d2_y; d2_done <= 1'b1; end
          if ((d1_done || d1_rdy) && (d2_done || d2_rdy)) st <= S_MT_ISS;
        end
        S_MT_ISS:  st <= S_MT_WAIT;
        S_MT_WAIT: if (m2_rdy) st <= S_OUT;
        S_OUT: begin
          t_out <= (zero || d2_z) ? T_NEVER : sel_i;
          rdy   <= 1'b1;
          st    <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
