// prog_decoder: the "program" port. Turns configuration frames received on
// the UART into memory-mapped register writes.
//
// A frame is eight bytes: 0x57 ('W'), {ac[3:0], table[3:0]}, index high,
// index low, then the 32-bit value, most significant byte first. Bytes
// before a 0x57 are skipped. A complete frame is presented on wr with
// wr_valid held high until wr_ready; bytes that arrive meanwhile are dropped,
// which cannot happen at UART rates because every target accepts in a few
// cycles. Tables 0-3 (c, alpha, beta, k) belong to the engine named by ac;
// tables 8-11 to the manager (see chem_pkg). frames counts accepted writes.
//
// The paper says that CAs are loaded and edited at runtime by writing
// memory-mapped registers over a 9600-baud UART; the frame format is this
// design's own.
module prog_decoder
  import chem_pkg::*;
#(
  parameter int unsigned BAUD_DIV = 8333
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx,
  output logic        wr_valid,
  output prog_wr_t    wr,
  input  logic        wr_ready,
  output logic [15:0] frames
);
  logic [7:0] b;
  logic       b_valid;
  logic [2:0] pos;
  logic [7:0] buf_ [7];

  uart_rx #(.BAUD_DIV(BAUD_DIV)) u_rx (.clk, .rst_n, .rx, .data(b), .valid(b_valid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0; wr_valid <= 1'b0; wr <= '0; frames <= '0;
      for (int i = 0; i < 7; i++) buf_[i] <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        frames   <= frames + 1'b1;
      end
      if (b_valid && !wr_valid) begin
        if (pos == 3'd0) begin
          if (b == 8'h57) pos <= 3'd1;
        end else begin
          buf_[pos - 3'd1] <= b;
          if (pos == 3'd7) begin
            pos      <= 3'd0;
            wr_valid <= 1'b1;
            wr.ac    <= buf_[0][7:4];
            wr.tbl   <= tbl_e'(buf_[0][3:0]);
            wr.idx   <= {buf_[1], buf_[2]};
            wr.data  <= {buf_[3], buf_[4], buf_[5], b};
          end else begin
            pos <= pos + 1'b1;
          end
        end
      end
    end
  end
endmodule
