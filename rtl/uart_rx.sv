// uart_rx: 8N1 UART receiver for the programming link.
//
// The line is synchronised by two flip-flops. A falling edge starts a frame;
// the start bit is checked at its middle, then each data bit (LSB first) is
// sampled BAUD_DIV cycles apart and the stop bit is checked. A good frame
// pulses valid with the byte for one cycle. BAUD_DIV is the clock-to-baud
// ratio; its default, 80 MHz / 9600 baud, matches the 9600-baud link and the
// 80 MHz clock of the reference board. Frame format is this design's choice.
module uart_rx #(
  parameter int unsigned BAUD_DIV = 8333
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid
);
  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} st_e;
  st_e st;
  logic [1:0]  sync;
  logic [31:0] cnt;
  logic [2:0]  bitn;
  logic [7:0]  sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= 2'b11; st <= R_IDLE; cnt <= '0; bitn <= '0; sh <= '0;
      data <= '0; valid <= 1'b0;
    end else begin
      sync  <= {sync[0], rx};
      valid <= 1'b0;
      case (st)
        R_IDLE: if (!sync[1]) begin st <= R_START; cnt <= 32'(BAUD_DIV / 2); end
        R_START: if (cnt == 0) begin
          if (!sync[1]) begin st <= R_DATA; cnt <= 32'(BAUD_DIV - 1); bitn <= '0; end
          else st <= R_IDLE;
        end else cnt <= cnt - 1;
        R_DATA: if (cnt == 0) begin
          sh  <= {sync[1], sh[7:1]};
          cnt <= 32'(BAUD_DIV - 1);
          if (bitn == 3'd7) st <= R_STOP;
          bitn <= bitn + 1'b1;
        end else cnt <= cnt - 1;
        R_STOP: if (cnt == 0) begin
          if (sync[1]) begin data <= sh; valid <= 1'b1; end
          st <= R_IDLE;
        end else cnt <= cnt - 1;
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
