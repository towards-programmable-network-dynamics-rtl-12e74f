// fp_mul: IEEE-754 single-precision multiplier, one clock of latency.
//
// Stands in for the vendor floating-point multiplier of the reaction
// scheduler. y = a * b is registered on the cycle op_nd is high and rdy
// pulses on the next cycle. Simplifications (this design's choice): the
// product is truncated rather than rounded, subnormal inputs and results are
// flushed to zero, an overflow or an infinite input yields infinity and NaN
// is not produced.
module fp_mul (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        op_nd,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        rdy
);
  logic [7:0]  ea, eb;
  logic [47:0] p;
  logic signed [10:0] e;
  logic [22:0] m;
  logic        s;
  logic [31:0] y_c;

  always_comb begin
    ea  = a[30:23];
    eb  = b[30:23];
    s   = a[31] ^ b[31];
    p   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (p[47]) begin
      m = p[46:24];
      e = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd126;
    end else begin
      m = p[45:23];
      e = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    end
    if (ea == 8'd0 || eb == 8'd0)          y_c = {s, 31'd0};
    else if (ea == 8'hFF || eb == 8'hFF)   y_c = {s, 8'hFF, 23'd0};
    else if (e <= 0)                       y_c = {s, 31'd0};
    else if (e >= 255)                     y_c = {s, 8'hFF, 23'd0};
    else                                   y_c = {s, e[7:0], m};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y   <= '0;
      rdy <= 1'b0;
    end else begin
      rdy <= op_nd;
      if (op_nd) y <= y_c;
    end
  end
endmodule
