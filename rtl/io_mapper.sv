// io_mapper: external event inputs and outputs of the manager.
//
// Input channel i maps a rising edge on ev_in[i] to "add ratio molecules to
// species s of engine a"; output channel j maps "species s of engine a holds
// at least ratio molecules" to removing them and a pulse of OUT_PULSE cycles
// on ev_out[j]. Each channel's map {ac[27:24], species[23:16], ratio[15:0]}
// is written through TBL_IN / TBL_OUT; a map with species 0 or ratio 0 is
// off (reset state).
//
// Inputs pass a two-flop synchroniser and edge detector into a per-channel
// pending counter, so events that arrive while the engine is busy are kept
// (up to 255). One request at a time is issued to the engines (io_valid,
// one-hot per engine, held until that engine's io_ready), channels served in
// round-robin order, inputs 0..N_IN-1 then outputs. An output request is only
// issued when the engine's concentration (io_c, the value of the addressed
// species) shows enough molecules and the channel's pulse has ended; the
// engine still checks again (io_ok).
//
// The paper says I/O events update their species in batch quantities given
// by a molecules-per-event ratio (1 mol/KB in its experiments); the
// synchroniser, pending counters, pulse output and arbitration are this
// design's own.
module io_mapper
  import chem_pkg::*;
#(
  parameter int unsigned NUM_AC    = 1,
  parameter int unsigned N_IN      = 4,
  parameter int unsigned N_OUT     = 4,
  parameter int unsigned OUT_PULSE = 8,
  parameter int unsigned C_W       = C_W_D
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  prog_wr_t          cfg,
  input  logic [N_IN-1:0]   ev_in,
  output logic [N_OUT-1:0]  ev_out,
  // request to the engines
  output logic [NUM_AC-1:0] io_valid,
  output io_op_e            io_op,
  output logic [SA_W-1:0]   io_addr,
  output logic [C_W-1:0]    io_amt,
  output logic [3:0]        io_ac,
  input  logic [NUM_AC-1:0] io_ready,
  input  logic [NUM_AC-1:0] io_ok,
  input  logic [C_W-1:0]    io_c,
  output logic [15:0]       in_events,
  output logic [15:0]       out_events
);
  localparam int unsigned NCH = N_IN + N_OUT;
  localparam int unsigned CW  = $clog2(NCH);

  logic [31:0] imap [N_IN];
  logic [31:0] omap [N_OUT];
  logic [1:0]  sync [N_IN];
  logic        prev [N_IN];
  logic [7:0]  pend [N_IN];
  logic [15:0] ptmr [N_OUT];
  logic [CW-1:0] ch;
  logic        busy;
  logic [31:0] m;
  logic        ch_in, want;
  logic [CW-1:0] ch_o;
  logic [N_IN-1:0] served, rise;

  always_comb
    for (int i = 0; i < N_IN; i++) begin
      served[i] = busy && ch_in && 32'(ch) == i && io_ready[m[27:24]];
      rise[i]   = sync[i][1] && !prev[i];
    end

  assign ch_in = (32'(ch) < N_IN);
  assign ch_o  = ch_in ? '0 : CW'(32'(ch) - N_IN);
  assign m     = ch_in ? imap[ch_in ? ch : '0] : omap[ch_o];
  assign io_ac   = m[27:24];
  assign io_addr = m[23:16];
  assign io_amt  = C_W'(m[15:0]);
  assign io_op   = ch_in ? IO_ADD : IO_SUBGE;

  always_comb begin
    if (m[23:16] == 8'd0 || m[15:0] == 16'd0 || 32'(m[27:24]) >= NUM_AC) want = 1'b0;
    else if (ch_in) want = (pend[ch_in ? ch : '0] != 8'd0);
    else            want = (ptmr[ch_o] == 16'd0) && (io_c >= C_W'(m[15:0]));
  end

  always_comb begin
    io_valid = '0;
    if (busy) io_valid[m[27:24]] = 1'b1;
  end

  always_comb
    for (int j = 0; j < N_OUT; j++) ev_out[j] = (ptmr[j] != 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch <= '0; busy <= 1'b0; in_events <= '0; out_events <= '0;
      for (int i = 0; i < N_IN; i++) begin
        imap[i] <= '0; sync[i] <= '0; prev[i] <= 1'b0; pend[i] <= '0;
      end
      for (int j = 0; j < N_OUT; j++) begin omap[j] <= '0; ptmr[j] <= '0; end
    end else begin
      if (cfg_valid && cfg.tbl == TBL_IN  && 32'(cfg.idx) < N_IN)  imap[cfg.idx[CW-1:0]] <= cfg.data;
      if (cfg_valid && cfg.tbl == TBL_OUT && 32'(cfg.idx) < N_OUT) omap[cfg.idx[CW-1:0]] <= cfg.data;
      for (int j = 0; j < N_OUT; j++) if (ptmr[j] != 0) ptmr[j] <= ptmr[j] - 1'b1;

      for (int i = 0; i < N_IN; i++) begin
        sync[i] <= {sync[i][0], ev_in[i]};
        prev[i] <= sync[i][1];
        if (rise[i] && !served[i]) begin
          if (pend[i] != 8'hFF) pend[i] <= pend[i] + 1'b1;
        end else if (!rise[i] && served[i]) begin
          pend[i] <= pend[i] - 1'b1;
        end
      end

      if (|rise) in_events <= in_events + 16'($countones(rise));
      if (busy) begin
        if (io_ready[m[27:24]]) begin
          busy <= 1'b0;
          if (!ch_in && io_ok[m[27:24]]) begin
            ptmr[ch_o] <= 16'(OUT_PULSE);
            out_events <= out_events + 1'b1;
          end
          ch <= (32'(ch) == NCH - 1) ? '0 : ch + 1'b1;
        end
      end else if (want) begin
        busy <= 1'b1;
      end else begin
        ch <= (32'(ch) == NCH - 1) ? '0 : ch + 1'b1;
      end
    end
  end

  // a request stays on one channel until it is answered
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy && !io_ready[m[27:24]] |=> busy && $stable(ch));
endmodule
