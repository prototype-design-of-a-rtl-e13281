// tfc_master_core: firmware core of the TFC Master, the root of the timing tree.
//
// The Master's subcycle counter and 64-bit timestamper run free on the local
// 120 MHz clock (derived from the master clock source); software may preset
// the timestamp by writing REG_TSSET_LO then REG_TSSET_HI (the write to HI
// loads it). The timing master FSM sends a timestamp frame every REG_PERIOD
// 40 MHz ticks (default PERIOD_DEFAULT) to all N_LINKS downstream Link Access
// Units when REG_CTRL bit 0 is set. The Wishbone register file (map in
// tfc_pkg) exposes the timestamp (reading REG_TS_LO snapshots the upper half
// into REG_TS_HI), the subcycle, frame count, link status and, for the link in
// REG_LINK_SEL, error and FIFO counts. ts/sub/sys_tick are the node's time for
// its user logic. The block set follows the paper's Master core figure; the
// trigger loop counter shown there is not included, and the register map is
// this design's own.
module tfc_master_core
  import tfc_pkg::*;
#(
  parameter int unsigned N_LINKS        = 48,
  parameter int unsigned SUBCYCLES      = 3,
  parameter int unsigned FIFO_AW        = 4,
  parameter int unsigned PERIOD_DEFAULT = 40000,
  localparam int unsigned SW = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  wb_req_t            wb_req,
  output wb_rsp_t            wb_rsp,
  output logic [63:0]        ts,
  output logic [SW-1:0]      sub,
  output logic               sys_tick,
  output logic [N_LINKS-1:0] links_up,
  input  logic [N_LINKS-1:0] gth_tx_clk,
  output link_word_t         gth_tx_word [N_LINKS],
  input  logic [N_LINKS-1:0] gth_rx_clk,
  input  gth_rx_t            gth_rx [N_LINKS]
);
  localparam logic [N_REGS-1:0] WR_MASK =
    N_REGS'((1 << REG_CTRL) | (1 << REG_PERIOD) | (1 << REG_TSSET_LO) |
            (1 << REG_TSSET_HI) | (1 << REG_LINK_SEL) | (1 << REG_LAT_COMP));

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

  subcycle_counter #(.SUBCYCLES(SUBCYCLES)) u_sub (
    .clk, .rst, .load(1'b0), .load_val('0), .sub, .sys_tick
  );

  timestamper #(.TS_W(64)) u_ts (
    .clk, .rst, .tick(sys_tick), .load(wr_stb[REG_TSSET_HI]),
    .load_val({regs[REG_TSSET_HI], regs[REG_TSSET_LO]}), .ts
  );

  logic [15:0] n_up, sel_err;
  logic [31:0] frames_sent, sel_fifo;

  tfc_downstream #(.N_LINKS(N_LINKS), .SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW)) u_dn (
    .clk, .rst, .enable(regs[REG_CTRL][0]), .period(regs[REG_PERIOD]),
    .sub, .sys_tick, .ts, .link_sel(regs[REG_LINK_SEL][7:0]),
    .links_up, .n_up, .frames_sent, .sel_err, .sel_fifo,
    .gth_tx_clk, .gth_tx_word, .gth_rx_clk, .gth_rx
  );

  logic [31:0] ts_hi_snap;
  always_ff @(posedge clk) begin
    if (rst)                    ts_hi_snap <= '0;
    else if (rd_stb[REG_TS_LO]) ts_hi_snap <= ts[63:32];
  end

  logic sel_up;
  always_comb begin
    sel_up = 1'b0;
    for (int i = 0; i < N_LINKS; i++)
      if (32'(regs[REG_LINK_SEL][7:0]) == i) sel_up = links_up[i];
    rd_val               = '0;
    rd_val[REG_ID]       = ID_MASTER;
    rd_val[REG_STATUS]   = {n_up, 14'd0, 1'b1, sel_up};
    rd_val[REG_TS_LO]    = ts[31:0];
    rd_val[REG_TS_HI]    = ts_hi_snap;
    rd_val[REG_SUB]      = 32'(sub);
    rd_val[REG_FRAMES]   = frames_sent;
    rd_val[REG_LINK_ERR] = 32'(sel_err);
    rd_val[REG_FIFO_CNT] = sel_fifo;
  end
endmodule
