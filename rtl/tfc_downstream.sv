// tfc_downstream: the Master-side half of a TFC core: one timing master FSM
// whose frames are broadcast to N_LINKS Link Access Units, plus per-link
// monitoring. link_sel picks the link whose error count and FIFO counts are
// reported; n_up counts the links whose initialisation is done.
// Broadcasting one timestamp stream to all downstream nodes follows the paper;
// the monitoring selection is this design's.
module tfc_downstream
  import tfc_pkg::*;
#(
  parameter int unsigned N_LINKS   = 48,
  parameter int unsigned SUBCYCLES = 3,
  parameter int unsigned FIFO_AW   = 4,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,
  input  logic [31:0]        period,
  input  logic [SW-1:0]      sub,
  input  logic               sys_tick,
  input  logic [63:0]        ts,
  input  logic [7:0]         link_sel,
  output logic [N_LINKS-1:0] links_up,
  output logic [15:0]        n_up,
  output logic [31:0]        frames_sent,
  output logic [15:0]        sel_err,
  output logic [31:0]        sel_fifo,
  input  logic [N_LINKS-1:0] gth_tx_clk,
  output link_word_t         gth_tx_word [N_LINKS],
  input  logic [N_LINKS-1:0] gth_rx_clk,
  input  gth_rx_t            gth_rx [N_LINKS]
);
  logic       tm_valid;
  link_word_t tm_word;

  timing_master #(.SUBCYCLES(SUBCYCLES), .TS_W(64)) u_tm (
    .clk, .rst, .enable, .period, .sub, .sys_tick, .ts,
    .tx_valid(tm_valid), .tx_word(tm_word), .frames_sent
  );

  logic [15:0]      err   [N_LINKS];
  logic [FIFO_AW:0] txcnt [N_LINKS];
  logic [FIFO_AW:0] rxcnt [N_LINKS];

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    logic       rx_valid_unused;
    link_word_t rx_word_unused;
    link_access_unit #(.FIFO_AW(FIFO_AW)) u_lau (
      .clk, .rst, .tx_valid(tm_valid), .tx_word(tm_word),
      .rx_valid(rx_valid_unused), .rx_word(rx_word_unused),
      .init_done(links_up[i]), .err_count(err[i]),
      .tx_fifo_count(txcnt[i]), .rx_fifo_count(rxcnt[i]),
      .gth_tx_clk(gth_tx_clk[i]), .gth_tx_word(gth_tx_word[i]),
      .gth_rx_clk(gth_rx_clk[i]), .gth_rx(gth_rx[i])
    );
  end

  always_comb begin
    n_up = '0;
    for (int i = 0; i < N_LINKS; i++) n_up = n_up + 16'(links_up[i]);
    sel_err  = '0;
    sel_fifo = '0;
    for (int i = 0; i < N_LINKS; i++)
      if (32'(link_sel) == i) begin
        sel_err  = err[i];
        sel_fifo = {16'(rxcnt[i]), 16'(txcnt[i])};
      end
  end
endmodule
