`timescale 1ns/1ps
// tb_prog_decoder: self-checking test of the programming port.
//
// Sends random configuration frames, with junk bytes between them, on the
// UART line at a short bit time, holds wr_ready low for a random number of
// cycles per write, and checks each presented write (engine, table, index,
// value) and the frame counter against the frames sent.
module tb_prog_decoder;
  import chem_pkg::*;
  localparam int DIV = 16;
  logic clk = 0, rst_n = 0, rx = 1;
  logic wr_valid, wr_ready = 0;
  prog_wr_t wr;
  logic [15:0] frames;
  int checks = 0, failures = 0;
  prog_wr_t sent [$];

  prog_decoder #(.BAUD_DIV(DIV)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send_byte(input logic [7:0] b);
    rx = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (DIV) @(posedge clk); end
    rx = 1; repeat (DIV) @(posedge clk);
  endtask

  // consumer
  initial begin
    int got = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (wr_valid && !wr_ready) begin
        repeat ($urandom_range(0, 5)) @(negedge clk);
        wr_ready = 1;
        checks++;
        if (sent.size() == 0) begin failures++; $display("FAIL write with no frame sent"); end
        else begin
          prog_wr_t e;
          e = sent.pop_front();
          if (wr !== e) begin failures++; $display("FAIL write %h expected %h", wr, e); end
        end
        @(negedge clk); wr_ready = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    for (int it = 0; it < 40; it++) begin
      prog_wr_t f;
      f.ac = 4'($urandom); f.tbl = tbl_e'($urandom_range(0, 11)); f.idx = 16'($urandom); f.data = $urandom;
      if ($urandom_range(0, 2) == 0) send_byte(8'h00);   // junk before the frame
      sent.push_back(f);
      send_byte(8'h57); send_byte({f.ac, 4'(f.tbl)}); send_byte(f.idx[15:8]); send_byte(f.idx[7:0]);
      send_byte(f.data[31:24]); send_byte(f.data[23:16]); send_byte(f.data[15:8]); send_byte(f.data[7:0]);
    end
    repeat (50) @(posedge clk);
    checks += 2;
    if (frames != 16'd40) begin failures++; $display("FAIL frames=%0d", frames); end
    if (sent.size() != 0) begin failures++; $display("FAIL %0d frames not presented", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
