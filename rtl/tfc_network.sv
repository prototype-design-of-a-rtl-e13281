// tfc_network: a complete Timing and Fast Control tree, the top of this design.
//
// One Master core drives N_SUB Submaster cores, and each Submaster drives
// EP_PER_SUB Endpoint cores, so every Endpoint sits at the same depth (two
// links from the Master) and sees the same fixed skew. The optical links
// themselves - gigabit transceivers, optical modules and fibres - are outside
// the logic, so every link end is a port: the parallel word the transceiver
// sends (gth_tx_word, with its TXUSRCLK) and the word, valid and decode-error
// flags it receives (gth_rx, with its RXUSRCLK). A board-level model or the
// real transceivers connect Master link i to Submaster i's upstream port, and
// Submaster s's downstream link e to Endpoint s*EP_PER_SUB+e. Each node has
// its own 120 MHz core clock (clk_m, clk_s, clk_e), which in hardware is the
// master clock source or the cleaned recovered clock, and its own Wishbone
// port for control software. The tree shape and its default size (5 x 40 =
// 200 Endpoints, one per readout board) are this design's choice.
module tfc_network
  import tfc_pkg::*;
#(
  parameter int unsigned N_SUB          = 5,
  parameter int unsigned EP_PER_SUB     = 40,
  parameter int unsigned SUBCYCLES      = 3,
  parameter int unsigned FIFO_AW        = 4,
  parameter int unsigned PERIOD_DEFAULT = 40000,
  localparam int unsigned N_EP = N_SUB * EP_PER_SUB,
  localparam int unsigned SW   = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic                 rst,
  input  logic                 clk_m,
  input  logic [N_SUB-1:0]     clk_s,
  input  logic [N_EP-1:0]      clk_e,

  // Wishbone of every node
  input  wb_req_t              m_wb_req,
  output wb_rsp_t              m_wb_rsp,
  input  wb_req_t              s_wb_req [N_SUB],
  output wb_rsp_t              s_wb_rsp [N_SUB],
  input  wb_req_t              e_wb_req [N_EP],
  output wb_rsp_t              e_wb_rsp [N_EP],

  // Master downstream links
  input  logic [N_SUB-1:0]     m_gth_tx_clk,
  output link_word_t           m_gth_tx_word [N_SUB],
  input  logic [N_SUB-1:0]     m_gth_rx_clk,
  input  gth_rx_t              m_gth_rx [N_SUB],
  // Submaster upstream links
  input  logic [N_SUB-1:0]     s_up_gth_tx_clk,
  output link_word_t           s_up_gth_tx_word [N_SUB],
  input  logic [N_SUB-1:0]     s_up_gth_rx_clk,
  input  gth_rx_t              s_up_gth_rx [N_SUB],
  // Submaster downstream links, index s*EP_PER_SUB+e
  input  logic [N_EP-1:0]      s_dn_gth_tx_clk,
  output link_word_t           s_dn_gth_tx_word [N_EP],
  input  logic [N_EP-1:0]      s_dn_gth_rx_clk,
  input  gth_rx_t              s_dn_gth_rx [N_EP],
  // Endpoint upstream links
  input  logic [N_EP-1:0]      e_gth_tx_clk,
  output link_word_t           e_gth_tx_word [N_EP],
  input  logic [N_EP-1:0]      e_gth_rx_clk,
  input  gth_rx_t              e_gth_rx [N_EP],

  // Time of every node for its user logic (40 MHz tick of the Master and
  // Submasters are internal)
  output logic [63:0]          m_ts,
  output logic [SW-1:0]        m_sub,
  output logic [63:0]          s_ts [N_SUB],
  output logic [SW-1:0]        s_sub [N_SUB],
  output logic [N_SUB-1:0]     s_synced,
  output logic [63:0]          e_ts [N_EP],
  output logic [SW-1:0]        e_sub [N_EP],
  output logic [N_EP-1:0]      e_synced,
  output logic [N_EP-1:0]      e_sys_tick,
  // Link status: Master links, Submaster downstream links, Endpoint links
  output logic [N_SUB-1:0]     m_links_up,
  output logic [N_EP-1:0]      s_dn_links_up,
  output logic [N_EP-1:0]      e_link_up
);
  logic              m_sys_tick;
  logic [N_SUB-1:0]  s_sys_tick, s_up_link_up;

  tfc_master_core #(
    .N_LINKS(N_SUB), .SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW),
    .PERIOD_DEFAULT(PERIOD_DEFAULT)
  ) u_master (
    .clk(clk_m), .rst, .wb_req(m_wb_req), .wb_rsp(m_wb_rsp),
    .ts(m_ts), .sub(m_sub), .sys_tick(m_sys_tick), .links_up(m_links_up),
    .gth_tx_clk(m_gth_tx_clk), .gth_tx_word(m_gth_tx_word),
    .gth_rx_clk(m_gth_rx_clk), .gth_rx(m_gth_rx)
  );

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    link_word_t            dn_tx [EP_PER_SUB];
    gth_rx_t               dn_rx [EP_PER_SUB];

    for (genvar e = 0; e < EP_PER_SUB; e++) begin : g_map
      assign s_dn_gth_tx_word[s*EP_PER_SUB + e] = dn_tx[e];
      assign dn_rx[e] = s_dn_gth_rx[s*EP_PER_SUB + e];
    end

    tfc_submaster_core #(
      .N_DOWN(EP_PER_SUB), .SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW),
      .PERIOD_DEFAULT(PERIOD_DEFAULT)
    ) u_sub (
      .clk(clk_s[s]), .rst, .wb_req(s_wb_req[s]), .wb_rsp(s_wb_rsp[s]),
      .ts(s_ts[s]), .sub(s_sub[s]), .sys_tick(s_sys_tick[s]), .synced(s_synced[s]),
      .up_link_up(s_up_link_up[s]), .dn_links_up(s_dn_links_up[s*EP_PER_SUB +: EP_PER_SUB]),
      .up_gth_tx_clk(s_up_gth_tx_clk[s]), .up_gth_tx_word(s_up_gth_tx_word[s]),
      .up_gth_rx_clk(s_up_gth_rx_clk[s]), .up_gth_rx(s_up_gth_rx[s]),
      .dn_gth_tx_clk(s_dn_gth_tx_clk[s*EP_PER_SUB +: EP_PER_SUB]), .dn_gth_tx_word(dn_tx),
      .dn_gth_rx_clk(s_dn_gth_rx_clk[s*EP_PER_SUB +: EP_PER_SUB]), .dn_gth_rx(dn_rx)
    );
  end

  for (genvar i = 0; i < N_EP; i++) begin : g_ep
    tfc_endpoint_core #(.SUBCYCLES(SUBCYCLES), .FIFO_AW(FIFO_AW)) u_ep (
      .clk(clk_e[i]), .rst, .wb_req(e_wb_req[i]), .wb_rsp(e_wb_rsp[i]),
      .ts(e_ts[i]), .sub(e_sub[i]), .sys_tick(e_sys_tick[i]), .synced(e_synced[i]),
      .link_up(e_link_up[i]),
      .gth_tx_clk(e_gth_tx_clk[i]), .gth_tx_word(e_gth_tx_word[i]),
      .gth_rx_clk(e_gth_rx_clk[i]), .gth_rx(e_gth_rx[i])
    );
  end
endmodule
