// uart_tx: 8N1 UART transmitter for the monitoring link.
//
// When idle (ready high) a pulse on valid latches data; the start bit, eight
// data bits LSB first and one stop bit then follow, each BAUD_DIV cycles
// long, and ready rises again after the stop bit. BAUD_DIV defaults to
// 80 MHz / 9600 baud. Frame format is this design's choice.
module uart_tx #(
  parameter int unsigned BAUD_DIV = 8333
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       tx
);
  logic [9:0]  sh;
  logic [3:0]  nbits;
  logic [31:0] cnt;

  assign ready = (nbits == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '1; nbits <= '0; cnt <= '0; tx <= 1'b1;
    end else if (nbits == 4'd0) begin
      tx <= 1'b1;
      if (valid) begin
        sh    <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        cnt   <= '0;
      end
    end else begin
      if (cnt == 0) begin
        tx    <= sh[0];
        sh    <= {1'b1, sh[9:1]};
        cnt   <= 32'(BAUD_DIV - 1);
      end else begin
        cnt <= cnt - 1;
        if (cnt == 1) nbits <= nbits - 1'b1;
      end
    end
  end
endmodule
