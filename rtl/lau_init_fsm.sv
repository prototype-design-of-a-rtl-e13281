// lau_init_fsm: link initialisation state machine of the Link Access Unit.
//
// Both ends of a bidirectional link run the same handshake. After reset a side
// sends INIT control words. Once it has received N_CONFIRM consecutive INIT or
// ACK words it sends ACK words. Once it has received N_CONFIRM consecutive
// words other than INIT (ACK, IDLE, data or frame words, i.e. the partner has
// seen it too) it declares the link up (init_done) and the LAU starts passing
// user traffic. An up link falls back to sending INIT when the protocol checker
// flags an error, when the partner sends INIT again, or when no word has
// arrived for RX_TIMEOUT cycles. tx_word is the handshake word the LAU writes
// into its Tx FIFO while the link is not up. The paper only says that the LAU
// performs link initialisation; the handshake and its rules are this design's.
module lau_init_fsm
  import tfc_pkg::*;
#(
  parameter int unsigned N_CONFIRM  = 8,
  parameter int unsigned RX_TIMEOUT = 64
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rx_valid,
  input  link_word_t rx_word,
  input  logic       rx_err,
  output link_word_t tx_word,
  output logic       init_done
);
  typedef enum logic [1:0] {S_RESET, S_SEND_INIT, S_SEND_ACK, S_UP} state_t;
  state_t state;

  logic [$clog2(N_CONFIRM+1)-1:0]  cnt;
  logic [$clog2(RX_TIMEOUT+1)-1:0] idle_cnt;

  logic rx_init, rx_ack;
  assign rx_init = rx_word.k && (rx_word.d == K_INIT);
  assign rx_ack  = rx_word.k && (rx_word.d == K_ACK);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_RESET;
      cnt      <= '0;
      idle_cnt <= '0;
    end else begin
      case (state)
        S_RESET: begin
          state <= S_SEND_INIT;
          cnt   <= '0;
        end
        S_SEND_INIT: begin
          if (rx_valid) begin
            if (rx_err || !(rx_init || rx_ack)) cnt <= '0;
            else if (cnt == $bits(cnt)'(N_CONFIRM - 1)) begin
              state <= S_SEND_ACK;
              cnt   <= '0;
            end else cnt <= cnt + 1'b1;
          end
        end
        S_SEND_ACK: begin
          if (rx_valid) begin
            if (rx_err || rx_init) cnt <= '0;
            else if (cnt == $bits(cnt)'(N_CONFIRM - 1)) begin
              state    <= S_UP;
              cnt      <= '0;
              idle_cnt <= '0;
            end else cnt <= cnt + 1'b1;
          end
        end
        S_UP: begin
          if (rx_valid) idle_cnt <= '0;
          else if (idle_cnt != $bits(idle_cnt)'(RX_TIMEOUT)) idle_cnt <= idle_cnt + 1'b1;
          if ((rx_valid && (rx_err || rx_init)) ||
              (idle_cnt == $bits(idle_cnt)'(RX_TIMEOUT))) begin
            state <= S_SEND_INIT;
            cnt   <= '0;
          end
        end
        default: state <= S_RESET;
      endcase
    end
  end

  always_comb begin
    case (state)
      S_SEND_ACK: tx_word = W_ACK;
      S_UP:       tx_word = W_IDLE;
      default:    tx_word = W_INIT;
    endcase
  end

  assign init_done = (state == S_UP);
endmodule
