// gth_link_model: behavioural stand-in for one direction of an optical link
// (transmitting transceiver, fibre, receiving transceiver) at the parallel
// word level. The word written at each edge of the sender's TXUSRCLK appears
// LAT cycles later at the receiver, whose RXUSRCLK is taken to be the same
// clock (as with clock-data recovery of a clean link). rx.valid rises LOCK
// cycles after `up` and falls at once when `up` drops (fibre pulled).
// inject_err marks the word delivered in that cycle with a decode error.
module gth_link_model
  import tfc_pkg::*;
#(
  parameter int unsigned LAT  = 6,
  parameter int unsigned LOCK = 8
) (
  input  logic       clk,
  input  logic       up,
  input  logic       inject_err,
  input  link_word_t tx_word,
  output gth_rx_t    rx
);
  link_word_t pipe [LAT];
  int unsigned lock_cnt = 0;

  always @(posedge clk) begin
    pipe[0] <= tx_word;
    for (int i = 1; i < int'(LAT); i++) pipe[i] <= pipe[i-1];
    if (!up) lock_cnt <= 0;
    else if (lock_cnt < LOCK) lock_cnt <= lock_cnt + 1;
  end

  assign rx.valid    = up && (lock_cnt >= LOCK);
  assign rx.code_err = inject_err;
  assign rx.word     = pipe[LAT-1];
endmodule
