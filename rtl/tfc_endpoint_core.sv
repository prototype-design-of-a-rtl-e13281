// tfc_endpoint_core: firmware core of a TFC Endpoint (a CRI board).
//
// One Link Access Unit connects it to its Submaster or to the Master. Behind it
// the timing endpoint FSM decodes timestamp frames and, when REG_CTRL bit 0 is
// set, corrects the local subcycle counter (the phase of the 40 MHz system
// period) and the 64-bit timestamper so that they follow the sender, delayed by
// the fixed link latency minus REG_LAT_COMP cycles. With the bit clear the
// node keeps its own free-running time (the paper's asynchronous run).
// Registers (map in tfc_pkg): timestamp with snapshot, subcycle, frames
// received, timestamp and phase corrections, arrival subcycle of the last
// frame, link error and FIFO counts, status (bit0 link up, bit1 synced).
// ts/sub/sys_tick/synced are the node's time for its user logic.
// The block set follows the paper's Endpoint core figure; the register map and
// latency compensation are this design's.
module tfc_endpoint_core
  import tfc_pkg::*;
#(
  parameter int unsigned SUBCYCLES = 3,
  parameter int unsigned FIFO_AW   = 4,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  wb_req_t       wb_req,
  output wb_rsp_t       wb_rsp,
  output logic [63:0]   ts,
  output logic [SW-1:0] sub,
  output logic          sys_tick,
  output logic          synced,
  output logic          link_up,
  input  logic          gth_tx_clk,
  output link_word_t    gth_tx_word,
  input  logic          gth_rx_clk,
  input  gth_rx_t       gth_rx
);
  localparam logic [N_REGS-1:0] WR_MASK =
    N_REGS'((1 << REG_CTRL) | (1 << REG_LAT_COMP));

  function automatic logic [N_REGS-1:0][31:0] rst_vals();
    logic [N_REGS-1:0][31:0] v = '0;
    v[REG_CTRL] = 32'd1;
    return v;
  endfunction

  logic [N_REGS-1:0][31:0] rd_val, regs;
  logic [N_REGS-1:0]       wr_stb, rd_stb;

  wb_slave #(.N(N_REGS), .WR_MASK(WR_MASK), .RST_VAL(rst_vals())) u_wb (
    .clk, .rst, .wb_req, .wb_rsp, .rd_val, .regs, .wr_stb, .rd_stb
  );

  logic          sub_load, ts_load;
  logic [SW-1:0] sub_load_val, arr_sub;
  logic [63:0]   ts_load_val;
  logic [31:0]   frames_rcvd, ts_corr, ph_corr, fifo_counts;
  logic [15:0]   frame_errs, err_count;

  subcycle_counter #(.SUBCYCLES(SUBCYCLES)) u_sub (
    .clk, .rst, .load(sub_load), .load_val(sub_load_val), .sub, .sys_tick
  );

  timestamper #(.TS_W(64)) u_ts (
    .clk, .rst, .tick(sys_tick), .load(ts_load), .load_val(ts_load_val), .ts
  );

  tfc_upstream #(.SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW)) u_up (
    .clk, .rst, .enable(regs[REG_CTRL][0]), .lat_comp(regs[REG_LAT_COMP][7:0]),
    .sub, .ts, .sub_load, .sub_load_val, .ts_load, .ts_load_val,
    .link_up, .synced, .arr_sub, .frames_rcvd, .ts_corr, .ph_corr,
    .frame_errs, .err_count, .fifo_counts,
    .gth_tx_clk, .gth_tx_word, .gth_rx_clk, .gth_rx
  );

  logic [31:0] ts_hi_snap;
  always_ff @(posedge clk) begin
    if (rst)                    ts_hi_snap <= '0;
    else if (rd_stb[REG_TS_LO]) ts_hi_snap <= ts[63:32];
  end

  always_comb begin
    rd_val               = '0;
    rd_val[REG_ID]       = ID_ENDPOINT;
    rd_val[REG_STATUS]   = {16'(link_up), 14'd0, synced, link_up};
    rd_val[REG_TS_LO]    = ts[31:0];
    rd_val[REG_TS_HI]    = ts_hi_snap;
    rd_val[REG_SUB]      = 32'(sub);
    rd_val[REG_FRAMES]   = frames_rcvd;
    rd_val[REG_TS_CORR]  = ts_corr;
    rd_val[REG_PH_CORR]  = ph_corr;
    rd_val[REG_ARR_SUB]  = 32'(arr_sub);
    rd_val[REG_LINK_ERR] = {frame_errs, err_count};
    rd_val[REG_FIFO_CNT] = fifo_counts;
  end
endmodule
