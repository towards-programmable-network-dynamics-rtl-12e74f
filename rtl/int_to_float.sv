// int_to_float: unsigned integer to IEEE-754 single, combinational.
//
// Used twice in the reaction scheduler: 16-bit concentrations (W = 16) and
// 32-bit remaining times (W = 32). The leading one is found, the value is
// normalised and the mantissa is truncated to 23 bits (this design's choice;
// exact for W <= 24).
module int_to_float #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a,
  output logic [31:0]  y
);
  logic [31:0] x, norm;
  logic [5:0]  lz;

  always_comb begin
    x  = 32'(a);
    lz = 6'd32;
    for (int i = 0; i < 32; i++)
      if (x[i]) lz = 6'(31 - i);
    norm = x << lz;
    if (x == 32'd0) y = 32'd0;
    else            y = {1'b0, 8'(8'd158 - 8'(lz)), norm[30:8]};
  end
endmodule
