// timing_master: downstream timestamp FSM of a TFC core.
//
// It counts 40 MHz system ticks; every `period` ticks (0 is taken as 1) it
// marks a frame as due, and at the next cycle with subcycle 0 it latches the
// local 64-bit timestamp and the subcycle and sends a three-word frame on
// three consecutive cycles: a start-of-frame control word carrying the
// latched subcycle, timestamp[63:32], timestamp[31:0]. The word stream goes
// to all downstream Link Access Units at once. The SOF word leaves one cycle
// after the latch. With enable low no frame is sent.
// The periodic serialisation into 32-bit words follows the paper; the frame
// format, its timing and the programmable period are this design's.
module timing_master
  import tfc_pkg::*;
#(
  parameter int unsigned SUBCYCLES = 3,
  parameter int unsigned TS_W      = 64,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            enable,
  input  logic [31:0]     period,
  input  logic [SW-1:0]   sub,
  input  logic            sys_tick,
  input  logic [TS_W-1:0] ts,
  output logic            tx_valid,
  output link_word_t      tx_word,
  output logic [31:0]     frames_sent
);
  typedef enum logic [1:0] {S_IDLE, S_HI, S_LO} state_t;
  state_t state;

  logic [31:0]     tick_cnt;
  logic            pending;
  logic [TS_W-1:0] ts_l;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      tick_cnt    <= '0;
      pending     <= 1'b0;
      ts_l        <= '0;
      tx_valid    <= 1'b0;
      tx_word     <= W_IDLE;
      frames_sent <= '0;
    end else begin
      if (sys_tick) begin
        if (tick_cnt + 1 >= period) begin
          tick_cnt <= '0;
          if (enable) pending <= 1'b1;
        end else begin
          tick_cnt <= tick_cnt + 1'b1;
        end
      end
      tx_valid <= 1'b0;
      case (state)
        S_IDLE: if (pending && enable && (sub == '0)) begin
          pending  <= 1'b0;
          ts_l     <= ts;
          tx_valid <= 1'b1;
          tx_word  <= sof_word(SUB_W'(sub));
          state    <= S_HI;
        end else if (!enable) pending <= 1'b0;
        S_HI: begin
          tx_valid <= 1'b1;
          tx_word  <= '{k: 1'b0, d: 32'(ts_l >> 32)};
          state    <= S_LO;
        end
        S_LO: begin
          tx_valid    <= 1'b1;
          tx_word     <= '{k: 1'b0, d: ts_l[31:0]};
          frames_sent <= frames_sent + 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
