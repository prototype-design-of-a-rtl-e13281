// timing_endpoint: upstream timestamp FSM of a TFC core.
//
// It watches the words received from the upstream link. A start-of-frame word
// opens a frame: the FSM stores the sender's subcycle s0 from it and captures
// the local subcycle at which it arrived (arr_sub). The next two data words are
// timestamp[63:32] and timestamp[31:0] (T). In the cycle the last word arrives,
// d cycles after the SOF, the sender's time for the next cycle is computed as
//     e = s0 + lat_comp + d + 1   (transport cycles since T began)
//     subcycle = e mod SUBCYCLES,  timestamp = T + e div SUBCYCLES
// where lat_comp is a programmable link-latency compensation (0 leaves the
// fixed link delay as a constant skew). With enable high, each of the local
// subcycle counter and timestamper is reloaded (sub_load / ts_load, taking
// effect in the next cycle) only if its own next value differs; the
// corrections are counted. A subcycle correction is what aligns the phase of
// the local 40 MHz system period to the master. synced rises after the first
// frame applied and falls when enable is cleared. A control word other than
// SOF inside a frame, or a frame longer than 255 cycles, aborts it (frame_errs).
// Deserialising, applying the timestamp and capturing the arrival subcycle
// follow the paper; the arithmetic, the compensation register and the
// correct-only-if-different rule are this design's reading of it.
module timing_endpoint
  import tfc_pkg::*;
#(
  parameter int unsigned SUBCYCLES = 3,
  parameter int unsigned TS_W      = 64,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            enable,
  input  logic [7:0]      lat_comp,
  input  logic            rx_valid,
  input  link_word_t      rx_word,
  input  logic [SW-1:0]   sub,
  input  logic [TS_W-1:0] ts,
  output logic            sub_load,
  output logic [SW-1:0]   sub_load_val,
  output logic            ts_load,
  output logic [TS_W-1:0] ts_load_val,
  output logic            synced,
  output logic [SW-1:0]   arr_sub,
  output logic [31:0]     frames_rcvd,
  output logic [31:0]     ts_corr,
  output logic [31:0]     ph_corr,
  output logic [15:0]     frame_errs
);
  localparam logic [SW-1:0] LAST = SW'(SUBCYCLES - 1);

  typedef enum logic [1:0] {S_WAIT_SOF, S_HI, S_LO} state_t;
  state_t state;

  logic [SW-1:0] s0;
  logic [7:0]    cyc;
  logic [31:0]   hi;

  logic rx_sof, rx_data, frame_done;
  assign rx_sof     = rx_valid && is_sof(rx_word);
  assign rx_data    = rx_valid && !rx_word.k;
  assign frame_done = (state == S_LO) && rx_data && !rx_sof;

  // Sender time for the next cycle.
  logic [10:0]     e;
  logic [SW-1:0]   new_sub;
  logic [TS_W-1:0] new_ts;
  logic [SW-1:0]   nxt_sub;
  logic [TS_W-1:0] nxt_ts;

  always_comb begin
    e       = 11'(s0) + 11'(lat_comp) + 11'(cyc) + 11'd1;
    new_sub = SW'(e % 11'(SUBCYCLES));
    new_ts  = TS_W'({hi, rx_word.d}) + TS_W'(e / 11'(SUBCYCLES));
    nxt_sub = (sub == LAST) ? '0 : sub + 1'b1;
    nxt_ts  = ts + TS_W'(sub == LAST);
  end

  assign sub_load     = frame_done && enable && (nxt_sub != new_sub);
  assign ts_load      = frame_done && enable && (nxt_ts  != new_ts);
  assign sub_load_val = new_sub;
  assign ts_load_val  = new_ts;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_WAIT_SOF;
      s0          <= '0;
      cyc         <= '0;
      hi          <= '0;
      synced      <= 1'b0;
      arr_sub     <= '0;
      frames_rcvd <= '0;
      ts_corr     <= '0;
      ph_corr     <= '0;
      frame_errs  <= '0;
    end else begin
      if (state != S_WAIT_SOF && cyc != 8'hFF) cyc <= cyc + 1'b1;
      if (!enable) synced <= 1'b0;

      if (rx_sof) begin
        if (state != S_WAIT_SOF) frame_errs <= frame_errs + 1'b1;
        s0      <= SW'(rx_word.d[9:8]);
        arr_sub <= sub;
        cyc     <= 8'd1;
        state   <= S_HI;
      end else begin
        case (state)
          S_HI: begin
            if (rx_data) begin
              hi    <= rx_word.d;
              state <= S_LO;
            end else if ((rx_valid && rx_word.k) || cyc == 8'hFF) begin
              frame_errs <= frame_errs + 1'b1;
              state      <= S_WAIT_SOF;
            end
          end
          S_LO: begin
            if (rx_data) begin
              frames_rcvd <= frames_rcvd + 1'b1;
              if (sub_load) ph_corr <= ph_corr + 1'b1;
              if (ts_load)  ts_corr <= ts_corr + 1'b1;
              if (enable)   synced  <= 1'b1;
              state <= S_WAIT_SOF;
            end else if ((rx_valid && rx_word.k) || cyc == 8'hFF) begin
              frame_errs <= frame_errs + 1'b1;
              state      <= S_WAIT_SOF;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
