// tb_tfc_master_core: a Master core with two downstream links, each joined by
// link models to a Link Access Unit standing in for the downstream node. The
// testbench presets the timestamp and the frame period over Wishbone and
// decodes the frames arriving at both partners: both links must come up and be
// counted in REG_STATUS, both partners must receive identical frames, each
// carrying the preset time advanced by the elapsed 40 MHz periods (one
// period of slack for the preset's landing), consecutive frames exactly one
// programmed period apart, and REG_FRAMES must count them.
module tb_tfc_master_core;
  import tfc_pkg::*;
  localparam int N = 2;
  logic rst = 1, clk = 0, txc = 0;
  logic [N-1:0] txc_d;
  wb_req_t wb_req; wb_rsp_t wb_rsp;
  logic [63:0] ts; logic [1:0] sub; logic sys_tick; logic [N-1:0] links_up;
  link_word_t m_gtx [N], d_gtx [N]; gth_rx_t m_grx [N], d_grx [N];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #4.166 clk = ~clk;
  initial begin #1.7; forever #4.166 txc = ~txc; end
  assign txc_d = {txc, txc};

  tfc_master_core #(.N_LINKS(N)) dut (.clk, .rst, .wb_req, .wb_rsp, .ts, .sub, .sys_tick,
    .links_up, .gth_tx_clk({clk, clk}), .gth_tx_word(m_gtx), .gth_rx_clk(txc_d), .gth_rx(m_grx));
  wb_bfm bfm (.clk, .req(wb_req), .rsp(wb_rsp));

  // frames decoded per partner: T values and arrival cycles
  longint unsigned fr_t [N][$];
  int unsigned     fr_c [N][$];

  for (genvar i = 0; i < N; i++) begin : g_p
    logic rxv, up; link_word_t rxw; logic [15:0] err; logic [4:0] tc, rc;
    link_access_unit u_p (.clk, .rst, .tx_valid(1'b0), .tx_word(W_IDLE), .rx_valid(rxv),
      .rx_word(rxw), .init_done(up), .err_count(err), .tx_fifo_count(tc), .rx_fifo_count(rc),
      .gth_tx_clk(txc), .gth_tx_word(d_gtx[i]), .gth_rx_clk(clk), .gth_rx(d_grx[i]));
    gth_link_model l_md (.clk(clk), .up(1'b1), .inject_err(1'b0), .tx_word(m_gtx[i]), .rx(d_grx[i]));
    gth_link_model l_dm (.clk(txc), .up(1'b1), .inject_err(1'b0), .tx_word(d_gtx[i]), .rx(m_grx[i]));
    int st = 0; logic [31:0] hi;
    always @(posedge clk) if (!rst && rxv) begin
      if (is_sof(rxw)) st = 1;
      else if (st == 1) begin hi = rxw.d; st = 2; end
      else if (st == 2) begin fr_t[i].push_back({hi, rxw.d}); fr_c[i].push_back(cyc); st = 0; end
    end
  end

  always @(posedge clk) cyc++;

  initial begin
    #600000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int unsigned c0;
    longint unsigned preset = 64'h0000_1234_FFFF_FFF0;
    #100 rst = 0;
    bfm.read(REG_ID, d);
    checks++; if (d != ID_MASTER) begin failures++; $display("FAIL id"); end
    bfm.write(REG_PERIOD, 32'd20);
    bfm.write(REG_TSSET_LO, preset[31:0]);
    bfm.write(REG_TSSET_HI, preset[63:32]);
    c0 = cyc;
    wait (links_up == '1);
    repeat (20) @(posedge clk);
    bfm.read(REG_STATUS, d);
    checks++; if (d[31:16] != N || d[0] != 1) begin failures++; $display("FAIL status %h", d); end
    for (int i = 0; i < N; i++) fr_t[i].delete();
    for (int i = 0; i < N; i++) fr_c[i].delete();
    repeat (400) @(posedge clk);
    checks++; if (fr_t[0].size() < 5) begin failures++; $display("FAIL frames %0d", fr_t[0].size()); end
    foreach (fr_t[0][k]) begin
      longint unsigned el;
      el = (fr_c[0][k] - c0) / 3;
      checks++;
      if (fr_t[1].size() <= k || fr_t[1][k] != fr_t[0][k]) begin failures++; $display("FAIL links differ"); end
      // frame time lies between preset+elapsed-latency and preset+elapsed
      if (fr_t[0][k] > preset + el || fr_t[0][k] + 20 < preset + el) begin
        failures++; $display("FAIL T %h preset+el %h", fr_t[0][k], preset + el);
      end
      if (k > 0) begin
        checks++;
        if (fr_t[0][k] - fr_t[0][k-1] != 20 || fr_c[0][k] - fr_c[0][k-1] != 60) begin
          failures++; $display("FAIL spacing"); end
      end
    end
    bfm.write(REG_CTRL, 0);
    repeat (100) @(posedge clk);
    bfm.read(REG_FRAMES, d);
    checks++; if (d < 5 || d > 40) begin failures++; $display("FAIL frame count %0d", d); end
    for (int i = 0; i < N; i++) fr_t[i].delete();
    repeat (200) @(posedge clk);
    checks++; if (fr_t[0].size() != 0) begin failures++; $display("FAIL frames while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
