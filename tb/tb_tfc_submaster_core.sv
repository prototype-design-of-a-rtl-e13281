// tb_tfc_submaster_core: a Submaster core with two downstream links. Its
// upstream link is joined to a Link Access Unit that the testbench drives with
// frames of a reference master time; its downstream links end in Link Access
// Units whose received frames the testbench decodes. Checks: no frame goes
// downstream before the Submaster is synchronised; afterwards its time keeps a
// constant offset to the reference; each downstream frame carries the
// Submaster's (hence the reference) time, within the frame latency; frames
// are one programmed period apart; REG_STATUS and REG_FRAMES report it.
module tb_tfc_submaster_core;
  import tfc_pkg::*;
  localparam int N = 2;
  logic rst = 1, clk = 0, txc = 0;
  wb_req_t wb_req; wb_rsp_t wb_rsp;
  logic [63:0] ts; logic [1:0] sub; logic sys_tick, synced, up_link_up;
  logic [N-1:0] dn_links_up;
  link_word_t up_gtx, p_gtx, dn_gtx [N], d_gtx [N];
  gth_rx_t up_grx, p_grx, dn_grx [N], d_grx [N];
  logic p_txv = 0; link_word_t p_txw = W_IDLE;
  logic p_rxv, p_up; link_word_t p_rxw; logic [15:0] p_err; logic [4:0] p_tc, p_rc;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  always #4 clk = ~clk;
  initial begin #2; forever #4 txc = ~txc; end

  tfc_submaster_core #(.N_DOWN(N)) dut (.clk, .rst, .wb_req, .wb_rsp, .ts, .sub, .sys_tick,
    .synced, .up_link_up, .dn_links_up,
    .up_gth_tx_clk(clk), .up_gth_tx_word(up_gtx), .up_gth_rx_clk(txc), .up_gth_rx(up_grx),
    .dn_gth_tx_clk({clk, clk}), .dn_gth_tx_word(dn_gtx), .dn_gth_rx_clk({txc, txc}), .dn_gth_rx(dn_grx));
  wb_bfm bfm (.clk, .req(wb_req), .rsp(wb_rsp));

  // upstream partner
  link_access_unit u_p (.clk, .rst, .tx_valid(p_txv), .tx_word(p_txw), .rx_valid(p_rxv),
    .rx_word(p_rxw), .init_done(p_up), .err_count(p_err), .tx_fifo_count(p_tc),
    .rx_fifo_count(p_rc), .gth_tx_clk(txc), .gth_tx_word(p_gtx), .gth_rx_clk(clk), .gth_rx(p_grx));
  gth_link_model l_pu (.clk(txc), .up(1'b1), .inject_err(1'b0), .tx_word(p_gtx), .rx(up_grx));
  gth_link_model l_up (.clk(clk), .up(1'b1), .inject_err(1'b0), .tx_word(up_gtx), .rx(p_grx));

  // reference master time
  logic [1:0] msub = 0; logic [63:0] mts = 64'h0000_0777_0000_0000;
  always @(posedge clk) begin
    cyc++;
    msub <= (msub == 2) ? 2'd0 : msub + 1'b1;
    if (msub == 2) mts <= mts + 1;
  end
  function automatic longint mtime(); return longint'(mts) * 3 + msub; endfunction

  // downstream partners and frame decoders
  longint fr_t [N][$];
  longint fr_m [N][$];   // reference time at arrival
  for (genvar i = 0; i < N; i++) begin : g_p
    logic rxv, up; link_word_t rxw; logic [15:0] err; logic [4:0] tc, rc;
    link_access_unit u_d (.clk, .rst, .tx_valid(1'b0), .tx_word(W_IDLE), .rx_valid(rxv),
      .rx_word(rxw), .init_done(up), .err_count(err), .tx_fifo_count(tc), .rx_fifo_count(rc),
      .gth_tx_clk(txc), .gth_tx_word(d_gtx[i]), .gth_rx_clk(clk), .gth_rx(d_grx[i]));
    gth_link_model l_sd (.clk(clk), .up(1'b1), .inject_err(1'b0), .tx_word(dn_gtx[i]), .rx(d_grx[i]));
    gth_link_model l_ds (.clk(txc), .up(1'b1), .inject_err(1'b0), .tx_word(d_gtx[i]), .rx(dn_grx[i]));
    int st = 0; logic [31:0] hi;
    always @(posedge clk) if (!rst && rxv) begin
      if (is_sof(rxw)) st = 1;
      else if (st == 1) begin hi = rxw.d; st = 2; end
      else if (st == 2) begin fr_t[i].push_back(longint'({hi, rxw.d})); fr_m[i].push_back(mtime()); st = 0; end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_frame();
    logic [63:0] t; logic [1:0] s;
    @(negedge clk);
    t = mts; s = msub;
    p_txv = 1; p_txw = sof_word(s);
    @(negedge clk); p_txw = '{k:1'b0, d:t[63:32]};
    @(negedge clk); p_txw = '{k:1'b0, d:t[31:0]};
    @(negedge clk); p_txv = 0; p_txw = W_IDLE;
  endtask

  initial begin
    logic [31:0] d;
    longint sk, dt;
    #100 rst = 0;
    bfm.write(REG_PERIOD, 32'd30);
    wait (p_up && up_link_up && dn_links_up == '1);
    repeat (300) @(posedge clk);
    checks++; if (fr_t[0].size() != 0) begin failures++; $display("FAIL frames before sync"); end
    send_frame();
    repeat (60) @(posedge clk);
    checks++; if (!synced) begin failures++; $display("FAIL not synced"); end
    @(negedge clk) sk = longint'(ts) * 3 + sub - mtime();
    $display("submaster offset to reference: %0d cycles", sk);
    for (int k = 0; k < 6; k++) begin
      repeat (100) @(posedge clk);
      send_frame();
      @(negedge clk);
      checks++;
      if (longint'(ts) * 3 + sub - mtime() != sk) begin failures++; $display("FAIL offset moved"); end
    end
    repeat (200) @(posedge clk);
    checks++; if (fr_t[0].size() < 5) begin failures++; $display("FAIL few frames %0d", fr_t[0].size()); end
    foreach (fr_t[0][k]) begin
      dt = fr_t[0][k] * 3 - (fr_m[0][k] + sk);
      checks++;
      if (dt > 0 || dt < -60 || fr_t[1][k] != fr_t[0][k]) begin
        failures++; $display("FAIL frame %0d time off by %0d", k, dt);
      end
      if (k > 0) begin
        checks++;
        if (fr_t[0][k] - fr_t[0][k-1] != 30) begin failures++; $display("FAIL spacing"); end
      end
    end
    bfm.read(REG_ID, d);
    checks++; if (d != ID_SUBMASTER) begin failures++; $display("FAIL id"); end
    bfm.read(REG_STATUS, d);
    checks++; if (d[31:16] != N || d[1:0] != 2'b11) begin failures++; $display("FAIL status %h", d); end
    bfm.read(REG_FRAMES, d);   // link 0 selected: upstream frames received
    checks++; if (d != 7) begin failures++; $display("FAIL frames rcvd %0d", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
