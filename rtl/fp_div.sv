// fp_div: IEEE-754 single-precision divider, one quotient bit per clock.
//
// Stands in for the vendor floating-point divider of the reaction scheduler.
// A pulse on op_nd latches a and b; the 25-bit mantissa quotient is formed by
// restoring division in 25 cycles, after which y = a / b is valid and rdy
// pulses for one cycle (27 cycles after op_nd). div0 is high with rdy when b
// is zero; y is then +/-infinity. Simplifications (this design's choice): the
// quotient is truncated, subnormals are flushed to zero, no NaN is produced.
module fp_div (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        op_nd,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        rdy,
  output logic        div0
);
  typedef enum logic [1:0] {IDLE, RUN, DONE} st_e;
  st_e st;
  logic [24:0] rem, mb, q;
  logic [4:0]  cnt;
  logic signed [10:0] e;
  logic        s, a_zero, b_zero, a_inf, b_inf;
  logic [25:0] diff;
  logic [31:0] y_c;

  assign diff = {1'b0, rem} - {1'b0, mb};

  logic signed [10:0] e1;
  assign e1 = e - 11'sd1;

  always_comb begin
    if (b_zero)             y_c = {s, 8'hFF, 23'd0};
    else if (a_zero||b_inf) y_c = {s, 31'd0};
    else if (a_inf)         y_c = {s, 8'hFF, 23'd0};
    else if (q[24]) begin
      if (e <= 0)           y_c = {s, 31'd0};
      else if (e >= 255)    y_c = {s, 8'hFF, 23'd0};
      else                  y_c = {s, e[7:0], q[23:1]};
    end else begin
      if (e1 <= 0)          y_c = {s, 31'd0};
      else if (e1 >= 255)   y_c = {s, 8'hFF, 23'd0};
      else                  y_c = {s, e1[7:0], q[22:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; rem <= '0; mb <= '0; q <= '0; cnt <= '0; e <= '0;
      s <= 1'b0; a_zero <= 1'b0; b_zero <= 1'b0; a_inf <= 1'b0; b_inf <= 1'b0;
      y <= '0; rdy <= 1'b0; div0 <= 1'b0;
    end else begin
      rdy <= 1'b0;
      case (st)
        IDLE: if (op_nd) begin
          s      <= a[31] ^ b[31];
          a_zero <= (a[30:23] == 8'd0);
          b_zero <= (b[30:23] == 8'd0);
          a_inf  <= (a[30:23] == 8'hFF);
          b_inf  <= (b[30:23] == 8'hFF);
          rem    <= {2'b01, a[22:0]};
          mb     <= {2'b01, b[22:0]};
          e      <= $signed({3'b0, a[30:23]}) - $signed({3'b0, b[30:23]}) + 11'sd127;
          q      <= '0;
          cnt    <= 5'd0;
          st     <= RUN;
        end
        RUN: begin
          if (!diff[25]) begin
            q   <= {q[23:0], 1'b1};
            rem <= {diff[23:0], 1'b0};
          end else begin
            q   <= {q[23:0], 1'b0};
            rem <= {rem[23:0], 1'b0};
          end
          cnt <= cnt + 5'd1;
          if (cnt == 5'd24) st <= DONE;
        end
        DONE: begin
          y    <= y_c;
          div0 <= b_zero;
          rdy  <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
