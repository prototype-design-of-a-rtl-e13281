// tfc_submaster_core: firmware core of a TFC Submaster, an inner node of the
// timing tree.
//
// Upstream it behaves like an Endpoint: one Link Access Unit towards the
// Master and a timing endpoint FSM that keeps the local subcycle counter and
// timestamper locked to the received frames (REG_CTRL bit 0, REG_LAT_COMP).
// Downstream it behaves like the Master: a timing master FSM re-sends its own,
// now synchronised, timestamp every REG_PERIOD ticks to N_DOWN Link Access
// Units. In hardware the node's 120 MHz clock is the upstream recovered clock
// after the jitter-cleaning PLL, and the same clock drives the downstream
// transmitters (cascaded clock recovery); here it is simply the clk input.
// REG_LINK_SEL 0 selects the upstream link for the per-link registers, 1..N
// the downstream links. Composing the two halves this way is this design's
// reading of the paper's description of the Submaster role.
module tfc_submaster_core
  import tfc_pkg::*;
#(
  parameter int unsigned N_DOWN         = 40,
  parameter int unsigned SUBCYCLES      = 3,
  parameter int unsigned FIFO_AW        = 4,
  parameter int unsigned PERIOD_DEFAULT = 40000,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  wb_req_t           wb_req,
  output wb_rsp_t           wb_rsp,
  output logic [63:0]       ts,
  output logic [SW-1:0]     sub,
  output logic              sys_tick,
  output logic              synced,
  output logic              up_link_up,
  output logic [N_DOWN-1:0] dn_links_up,
  // upstream transceiver
  input  logic              up_gth_tx_clk,
  output link_word_t        up_gth_tx_word,
  input  logic              up_gth_rx_clk,
  input  gth_rx_t           up_gth_rx,
  // downstream transceivers
  input  logic [N_DOWN-1:0] dn_gth_tx_clk,
  output link_word_t        dn_gth_tx_word [N_DOWN],
  input  logic [N_DOWN-1:0] dn_gth_rx_clk,
  input  gth_rx_t           dn_gth_rx [N_DOWN]
);
  localparam logic [N_REGS-1:0] WR_MASK =
    N_REGS'((1 << REG_CTRL) | (1 << REG_PERIOD) | (1 << REG_LINK_SEL) |
            (1 << REG_LAT_COMP));

  function automatic logic [N_REGS-1:0][31:0] rst_vals();
    logic [N_REGS-1:0][31:0] v = '0;
    v[REG_CTRL]   = 32'd1;
    v[REG_PERIOD] = 32'(PERIOD_DEFAULT);
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
  logic [31:0]   frames_rcvd, ts_corr, ph_corr, up_fifo;
  logic [15:0]   frame_errs, up_err;

  subcycle_counter #(.SUBCYCLES(SUBCYCLES)) u_sub (
    .clk, .rst, .load(sub_load), .load_val(sub_load_val), .sub, .sys_tick
  );

  timestamper #(.TS_W(64)) u_ts (
    .clk, .rst, .tick(sys_tick), .load(ts_load), .load_val(ts_load_val), .ts
  );

  tfc_upstream #(.SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW)) u_up (
    .clk, .rst, .enable(regs[REG_CTRL][0]), .lat_comp(regs[REG_LAT_COMP][7:0]),
    .sub, .ts, .sub_load, .sub_load_val, .ts_load, .ts_load_val,
    .link_up(up_link_up), .synced, .arr_sub, .frames_rcvd, .ts_corr, .ph_corr,
    .frame_errs, .err_count(up_err), .fifo_counts(up_fifo),
    .gth_tx_clk(up_gth_tx_clk), .gth_tx_word(up_gth_tx_word),
    .gth_rx_clk(up_gth_rx_clk), .gth_rx(up_gth_rx)
  );

  logic [15:0] n_up, dn_err;
  logic [31:0] frames_sent, dn_fifo;
  logic [7:0]  link_sel, dn_sel;
  assign link_sel = regs[REG_LINK_SEL][7:0];
  assign dn_sel   = link_sel - 8'd1;

  // Frames are only forwarded once this node itself is synchronised.
  tfc_downstream #(.N_LINKS(N_DOWN), .SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW)) u_dn (
    .clk, .rst, .enable(regs[REG_CTRL][0] && synced), .period(regs[REG_PERIOD]),
    .sub, .sys_tick, .ts, .link_sel(dn_sel),
    .links_up(dn_links_up), .n_up, .frames_sent, .sel_err(dn_err), .sel_fifo(dn_fifo),
    .gth_tx_clk(dn_gth_tx_clk), .gth_tx_word(dn_gth_tx_word),
    .gth_rx_clk(dn_gth_rx_clk), .gth_rx(dn_gth_rx)
  );

  logic [31:0] ts_hi_snap;
  always_ff @(posedge clk) begin
    if (rst)                    ts_hi_snap <= '0;
    else if (rd_stb[REG_TS_LO]) ts_hi_snap <= ts[63:32];
  end

  always_comb begin
    rd_val               = '0;
    rd_val[REG_ID]       = ID_SUBMASTER;
    rd_val[REG_STATUS]   = {n_up, 14'd0, synced, up_link_up};
    rd_val[REG_TS_LO]    = ts[31:0];
    rd_val[REG_TS_HI]    = ts_hi_snap;
    rd_val[REG_SUB]      = 32'(sub);
    rd_val[REG_FRAMES]   = (link_sel == 8'd0) ? frames_rcvd : frames_sent;
    rd_val[REG_TS_CORR]  = ts_corr;
    rd_val[REG_PH_CORR]  = ph_corr;
    rd_val[REG_ARR_SUB]  = 32'(arr_sub);
    rd_val[REG_LINK_ERR] = (link_sel == 8'd0) ? {frame_errs, up_err} : 32'(dn_err);
    rd_val[REG_FIFO_CNT] = (link_sel == 8'd0) ? up_fifo : dn_fifo;
  end
endmodule
