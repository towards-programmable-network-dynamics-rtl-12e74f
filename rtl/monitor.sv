// monitor: periodic logging of selected concentrations over the UART.
//
// N_MON slots each name an engine and a species and are enabled by the
// programming table TBL_MONSEL (data = {enable at bit 31, ac[11:8],
// species[7:0]}); TBL_MONPER sets the period in clock cycles (0 stops the
// log). Every period, for each enabled slot in turn, the monitor shows the
// slot's (mon_ac, mon_addr) to the manager, which returns the concentration
// on mon_c in the same cycle, and sends four bytes: 0xA5, slot number, value
// high byte, value low byte. A period that ends while a report is still
// being sent is skipped. reports counts completed slot reports.
//
// The paper says the manager logs selected species' concentrations
// periodically over a 9600-baud UART; the report format and the slot count
// are this design's own.
module monitor
  import chem_pkg::*;
#(
  parameter int unsigned BAUD_DIV = 8333,
  parameter int unsigned N_MON    = 4,
  parameter int unsigned C_W      = C_W_D
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_valid,
  input  prog_wr_t        cfg,
  output logic [3:0]      mon_ac,
  output logic [SA_W-1:0] mon_addr,
  input  logic [C_W-1:0]  mon_c,
  output logic            tx,
  output logic [15:0]     reports
);
  localparam int unsigned MW = (N_MON > 1) ? $clog2(N_MON) : 1;
  logic [N_MON-1:0] en;
  logic [3:0]       sac [N_MON];
  logic [SA_W-1:0]  ssp [N_MON];
  logic [31:0]      period, tmr;
  logic [MW-1:0]    slot;
  logic [1:0]       bytei;
  logic             active, tx_valid, tx_ready;
  logic [7:0]       tx_data;
  logic [15:0]      val;

  uart_tx #(.BAUD_DIV(BAUD_DIV)) u_tx (.clk, .rst_n, .valid(tx_valid), .data(tx_data),
                                       .ready(tx_ready), .tx);

  assign mon_ac   = sac[slot];
  assign mon_addr = ssp[slot];

  always_comb begin
    case (bytei)
      2'd0:    tx_data = 8'hA5;
      2'd1:    tx_data = 8'(slot);
      2'd2:    tx_data = val[15:8];
      default: tx_data = val[7:0];
    endcase
  end
  assign tx_valid = active && en[slot] && tx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en <= '0; period <= '0; tmr <= '0; slot <= '0; bytei <= '0;
      active <= 1'b0; val <= '0; reports <= '0;
      for (int i = 0; i < N_MON; i++) begin sac[i] <= '0; ssp[i] <= '0; end
    end else begin
      if (cfg_valid && cfg.tbl == TBL_MONSEL && 32'(cfg.idx) < N_MON) begin
        en[MW'(cfg.idx)]  <= cfg.data[31];
        sac[MW'(cfg.idx)] <= cfg.data[11:8];
        ssp[MW'(cfg.idx)] <= cfg.data[SA_W-1:0];
      end
      if (cfg_valid && cfg.tbl == TBL_MONPER) begin
        period <= cfg.data;
        tmr    <= cfg.data;
      end else if (period != 0) begin
        if (tmr <= 1) begin
          tmr <= period;
          if (!active) begin active <= 1'b1; slot <= '0; bytei <= '0; end
        end else tmr <= tmr - 1;
      end
      if (active) begin
        if (!en[slot]) begin
          if (32'(slot) == N_MON - 1) active <= 1'b0;
          else slot <= slot + 1'b1;
        end else if (tx_ready) begin
          if (bytei == 2'd0) val <= 16'(mon_c);
          bytei <= bytei + 1'b1;
          if (bytei == 2'd3) begin
            reports <= reports + 1'b1;
            if (32'(slot) == N_MON - 1) active <= 1'b0;
            else slot <= slot + 1'b1;
          end
        end
      end
    end
  end
endmodule
