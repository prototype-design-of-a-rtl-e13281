// link_access_unit (LAU): abstracts one bidirectional transceiver link from
// the user logic of a TFC core.
//
// Transmit: every core-clock cycle the LAU writes one word into the Tx FIFO:
// the Initialisation FSM's handshake word while the link is down, otherwise the
// user's word (tx_valid) or an IDLE filler. The transceiver side starts reading
// once the Tx FIFO is half full and then reads one word per TXUSRCLK cycle, so
// the FIFO works as an elastic buffer between the two equal-frequency clocks;
// if it ever runs dry an IDLE is sent and reading restarts at half full.
// Receive: every word the transceiver delivers (gth_rx.valid) is written into
// the Rx FIFO with its decode-error flag; the core side drains it the same way
// and registers the word. The registered word feeds the Protocol checker, the
// Initialisation FSM and the user output (rx_word, qualified by rx_valid =
// "Data valid"). Both FIFO counts are brought out for monitoring. User words
// offered while init_done is low are dropped.
// Latency: a word spends one write cycle, two synchroniser stages and about
// half the FIFO depth in each FIFO; it is constant for fixed clock phases.
// Block structure follows the paper's LAU figure; the elastic-buffer operation
// and the filler words are this design's.
module link_access_unit
  import tfc_pkg::*;
#(
  parameter int unsigned FIFO_AW    = 4,
  parameter int unsigned N_CONFIRM  = 8,
  parameter int unsigned RX_TIMEOUT = 64
) (
  // core side
  input  logic             clk,
  input  logic             rst,
  input  logic             tx_valid,
  input  link_word_t       tx_word,
  output logic             rx_valid,
  output link_word_t       rx_word,
  output logic             init_done,
  output logic [15:0]      err_count,
  output logic [FIFO_AW:0] tx_fifo_count,
  output logic [FIFO_AW:0] rx_fifo_count,
  // transceiver side
  input  logic             gth_tx_clk,
  output link_word_t       gth_tx_word,
  input  logic             gth_rx_clk,
  input  gth_rx_t          gth_rx
);
  localparam int unsigned HALF = 2 ** (FIFO_AW - 1);

  logic tx_rst, rx_rst;
  rst_sync u_tx_rst (.clk(gth_tx_clk), .rst_in(rst), .rst_out(tx_rst));
  rst_sync u_rx_rst (.clk(gth_rx_clk), .rst_in(rst), .rst_out(rx_rst));

  // ---------------- transmit path ----------------
  link_word_t init_word, txf_in, txf_out;
  logic       txf_full, txf_empty, txf_rd, tx_primed;
  logic [FIFO_AW:0] txf_rcount;

  assign txf_in = init_done ? (tx_valid ? tx_word : W_IDLE) : init_word;

  async_fifo #(.WIDTH($bits(link_word_t)), .AW(FIFO_AW)) u_tx_fifo (
    .wclk(clk), .wrst(rst), .wr_en(1'b1), .wdata(txf_in), .full(txf_full),
    .wcount(tx_fifo_count),
    .rclk(gth_tx_clk), .rrst(tx_rst), .rd_en(txf_rd), .rdata(txf_out),
    .empty(txf_empty), .rcount(txf_rcount)
  );

  assign txf_rd = tx_primed && !txf_empty;

  always_ff @(posedge gth_tx_clk) begin
    if (tx_rst) begin
      tx_primed   <= 1'b0;
      gth_tx_word <= W_IDLE;
    end else begin
      if (!tx_primed && (txf_rcount >= (FIFO_AW+1)'(HALF))) tx_primed <= 1'b1;
      else if (tx_primed && txf_empty)                      tx_primed <= 1'b0;
      gth_tx_word <= txf_rd ? txf_out : W_IDLE;
    end
  end

  // ---------------- receive path ----------------
  typedef struct packed {
    logic       code_err;
    link_word_t word;
  } rx_entry_t;

  rx_entry_t rxf_in, rxf_out;
  logic      rxf_full, rxf_empty, rxf_rd, rx_primed;
  logic [FIFO_AW:0] rxf_wcount;

  assign rxf_in = '{code_err: gth_rx.code_err, word: gth_rx.word};

  async_fifo #(.WIDTH($bits(rx_entry_t)), .AW(FIFO_AW)) u_rx_fifo (
    .wclk(gth_rx_clk), .wrst(rx_rst), .wr_en(gth_rx.valid), .wdata(rxf_in),
    .full(rxf_full), .wcount(rxf_wcount),
    .rclk(clk), .rrst(rst), .rd_en(rxf_rd), .rdata(rxf_out),
    .empty(rxf_empty), .rcount(rx_fifo_count)
  );

  assign rxf_rd = rx_primed && !rxf_empty;

  logic       r_valid, r_cerr;
  link_word_t r_word;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_primed <= 1'b0;
      r_valid   <= 1'b0;
      r_cerr    <= 1'b0;
      r_word    <= W_IDLE;
    end else begin
      if (!rx_primed && (rx_fifo_count >= (FIFO_AW+1)'(HALF))) rx_primed <= 1'b1;
      else if (rx_primed && rxf_empty)                         rx_primed <= 1'b0;
      r_valid <= rxf_rd;
      if (rxf_rd) begin
        r_word <= rxf_out.word;
        r_cerr <= rxf_out.code_err;
      end
    end
  end

  logic word_err;

  lau_protocol_checker u_checker (
    .clk, .rst, .rx_valid(r_valid), .rx_word(r_word), .rx_code_err(r_cerr),
    .init_done, .data_valid(rx_valid), .word_err, .err_count
  );

  lau_init_fsm #(.N_CONFIRM(N_CONFIRM), .RX_TIMEOUT(RX_TIMEOUT)) u_init (
    .clk, .rst, .rx_valid(r_valid), .rx_word(r_word), .rx_err(word_err),
    .tx_word(init_word), .init_done
  );

  assign rx_word = r_word;
endmodule
