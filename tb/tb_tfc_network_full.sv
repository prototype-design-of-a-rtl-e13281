// tb_tfc_network_full: the end-to-end sequence of tfc_network_tb_body.svh on the
// tree at its default size (five Submasters with 40 Endpoints each).
module tb_tfc_network_full;
  localparam int N_SUB = 5, EP_PER_SUB = 40;  // the defaults of tfc_network
`include "tfc_network_tb_body.svh"

  tfc_network dut (
    .rst, .clk_m, .clk_s, .clk_e,
    .m_wb_req, .m_wb_rsp, .s_wb_req, .s_wb_rsp, .e_wb_req, .e_wb_rsp,
    .m_gth_tx_clk({N_SUB{clk_m}}), .m_gth_tx_word, .m_gth_rx_clk(clk_s), .m_gth_rx,
    .s_up_gth_tx_clk(clk_s), .s_up_gth_tx_word, .s_up_gth_rx_clk({N_SUB{clk_m}}), .s_up_gth_rx,
    .s_dn_gth_tx_clk(e_rx_clk), .s_dn_gth_tx_word, .s_dn_gth_rx_clk(s_dn_rx_clk), .s_dn_gth_rx,
    .e_gth_tx_clk(clk_e), .e_gth_tx_word, .e_gth_rx_clk(e_rx_clk), .e_gth_rx,
    .m_ts, .m_sub, .s_ts, .s_sub, .s_synced, .e_ts, .e_sub, .e_synced, .e_sys_tick,
    .m_links_up, .s_dn_links_up, .e_link_up
  );
endmodule
