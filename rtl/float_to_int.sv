// float_to_int: IEEE-754 single to unsigned 32-bit integer, combinational.
//
// Converts the scheduler's floating-point reaction time into clock cycles.
// The fraction is truncated; negative values and values below one give 0,
// values of 2^32 and above (infinity included) saturate to all ones, which
// the timers read as "never" (this design's choice).
module float_to_int (
  input  logic [31:0] a,
  output logic [31:0] y
);
  logic [7:0]  ex;
  logic [55:0] sh;

  always_comb begin
    ex = a[30:23];
    sh = {32'd0, 1'b1, a[22:0]};
    if (a[31] || ex < 8'd127)  y = 32'd0;
    else if (ex >= 8'd159)     y = '1;
    else begin
      sh = sh << (ex - 8'd127);
      y  = sh[54:23];
    end
  end
endmodule
