// lau_protocol_checker: protocol check of the words leaving the Rx FIFO.
//
// A word is legal if it is a data word, one of the IDLE / INIT / ACK control
// words, or a start-of-frame word with its reserved bits zero, and the
// transceiver reported no decode error for it. word_err flags an illegal word
// in the same cycle (combinational); err_count counts them, saturating at its
// maximum. data_valid marks, in the same cycle, a legal user word (data or
// start-of-frame) received while the link is up: it is the "Data valid" that
// qualifies the LAU's received data. The paper names a protocol checker for
// link status monitoring; which words are legal is this design's choice.
module lau_protocol_checker
  import tfc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        rx_valid,
  input  link_word_t  rx_word,
  input  logic        rx_code_err,
  input  logic        init_done,
  output logic        data_valid,
  output logic        word_err,
  output logic [15:0] err_count
);
  logic legal_ctrl, user_word, legal;

  assign legal_ctrl = rx_word.k && ((rx_word.d == K_IDLE) || (rx_word.d == K_INIT) ||
                                    (rx_word.d == K_ACK)  || is_sof(rx_word));
  assign user_word  = !rx_word.k || is_sof(rx_word);
  assign legal      = !rx_code_err && (!rx_word.k || legal_ctrl);

  assign word_err   = rx_valid && !legal;
  assign data_valid = rx_valid && legal && user_word && init_done;

  always_ff @(posedge clk) begin
    if (rst)                              err_count <= '0;
    else if (word_err && (err_count != '1)) err_count <= err_count + 1'b1;
  end
endmodule
