// tfc_upstream: the Endpoint-side half of a TFC core: one Link Access Unit
// towards the Master and the timing endpoint FSM behind it. The FSM's reload
// requests go to the core's subcycle counter and timestamper. All monitoring
// values of the link and the FSM are passed out for the register file.
module tfc_upstream
  import tfc_pkg::*;
#(
  parameter int unsigned SUBCYCLES = 3,
  parameter int unsigned FIFO_AW   = 4,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             enable,
  input  logic [7:0]       lat_comp,
  input  logic [SW-1:0]    sub,
  input  logic [63:0]      ts,
  output logic             sub_load,
  output logic [SW-1:0]    sub_load_val,
  output logic             ts_load,
  output logic [63:0]      ts_load_val,
  output logic             link_up,
  output logic             synced,
  output logic [SW-1:0]    arr_sub,
  output logic [31:0]      frames_rcvd,
  output logic [31:0]      ts_corr,
  output logic [31:0]      ph_corr,
  output logic [15:0]      frame_errs,
  output logic [15:0]      err_count,
  output logic [31:0]      fifo_counts,
  input  logic             gth_tx_clk,
  output link_word_t       gth_tx_word,
  input  logic             gth_rx_clk,
  input  gth_rx_t          gth_rx
);
  logic             rx_valid;
  link_word_t       rx_word;
  logic [FIFO_AW:0] txcnt, rxcnt;

  // The upstream direction carries no user traffic in this prototype; the
  // link is still initialised and kept alive with filler words.
  link_access_unit #(.FIFO_AW(FIFO_AW)) u_lau (
    .clk, .rst, .tx_valid(1'b0), .tx_word(W_IDLE),
    .rx_valid, .rx_word, .init_done(link_up), .err_count,
    .tx_fifo_count(txcnt), .rx_fifo_count(rxcnt),
    .gth_tx_clk, .gth_tx_word, .gth_rx_clk, .gth_rx
  );

  assign fifo_counts = {16'(rxcnt), 16'(txcnt)};

  timing_endpoint #(.SUBCYCLES(SUBCYCLES), .TS_W(64)) u_te (
    .clk, .rst, .enable, .lat_comp, .rx_valid, .rx_word, .sub, .ts,
    .sub_load, .sub_load_val, .ts_load, .ts_load_val, .synced, .arr_sub,
    .frames_rcvd, .ts_corr, .ph_corr, .frame_errs
  );
endmodule
