// tb_tfc_endpoint_core: one Endpoint core linked (through link models) to a
// Link Access Unit that the testbench drives with timestamp frames built from
// a reference master time. Through Wishbone it checks the identifier, link up
// and synced status, frames received, and that the endpoint time read back
// (snapshot of both halves) equals the reference time plus a constant skew
// frame after frame. It also checks that a frame finding the time right makes
// no correction, that REG_LAT_COMP shifts the time by exactly that many
// cycles, and that with synchronisation disabled frames are not applied.
module tb_tfc_endpoint_core;
  import tfc_pkg::*;
  logic rst = 1, clk = 0, txc_m = 0, txc_e = 0;
  wb_req_t wb_req; wb_rsp_t wb_rsp;
  logic [63:0] ts; logic [1:0] sub; logic sys_tick, synced, link_up;
  link_word_t e_gtx, m_gtx; gth_rx_t e_grx, m_grx;
  logic m_txv = 0; link_word_t m_txw = W_IDLE;
  logic m_rxv, m_up; link_word_t m_rxw;
  logic [15:0] m_err; logic [4:0] m_tc, m_rc;
  int checks = 0, failures = 0;

  always #4.166 clk = ~clk;
  initial begin #1.1; forever #4.166 txc_m = ~txc_m; end
  initial begin #2.9; forever #4.166 txc_e = ~txc_e; end

  tfc_endpoint_core dut (.clk, .rst, .wb_req, .wb_rsp, .ts, .sub, .sys_tick, .synced,
    .link_up, .gth_tx_clk(txc_e), .gth_tx_word(e_gtx), .gth_rx_clk(txc_m), .gth_rx(e_grx));
  link_access_unit u_m (.clk, .rst, .tx_valid(m_txv), .tx_word(m_txw), .rx_valid(m_rxv),
    .rx_word(m_rxw), .init_done(m_up), .err_count(m_err), .tx_fifo_count(m_tc),
    .rx_fifo_count(m_rc), .gth_tx_clk(txc_m), .gth_tx_word(m_gtx), .gth_rx_clk(txc_e), .gth_rx(m_grx));
  gth_link_model l_me (.clk(txc_m), .up(1'b1), .inject_err(1'b0), .tx_word(m_gtx), .rx(e_grx));
  gth_link_model l_em (.clk(txc_e), .up(1'b1), .inject_err(1'b0), .tx_word(e_gtx), .rx(m_grx));
  wb_bfm bfm (.clk, .req(wb_req), .rsp(wb_rsp));

  // reference master time, same clock as the endpoint core
  logic [1:0] msub = 0; logic [63:0] mts = 64'h0000_00AB_FFFF_FF00;
  always @(posedge clk) begin
    msub <= (msub == 2) ? 2'd0 : msub + 1'b1;
    if (msub == 2) mts <= mts + 1;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_frame();
    logic [63:0] t; logic [1:0] s;
    @(negedge clk);
    t = mts; s = msub;
    m_txv = 1; m_txw = sof_word(s);
    @(negedge clk); m_txw = '{k:1'b0, d:t[63:32]};
    @(negedge clk); m_txw = '{k:1'b0, d:t[31:0]};
    @(negedge clk); m_txv = 0; m_txw = W_IDLE;
    repeat (60) @(posedge clk);
  endtask

  // skew = endpoint time - master time, in 120 MHz cycles, sampled directly
  function automatic longint skew();
    return longint'(ts) * 3 + sub - (longint'(mts) * 3 + msub);
  endfunction

  task automatic rd_time(output logic [63:0] t);
    logic [31:0] lo, hi;
    bfm.read(REG_TS_LO, lo);
    bfm.read(REG_TS_HI, hi);
    t = {hi, lo};
  endtask

  initial begin
    logic [31:0] d, corr;
    logic [63:0] t;
    longint sk0;
    #100 rst = 0;
    bfm.read(REG_ID, d);
    checks++; if (d != ID_ENDPOINT) begin failures++; $display("FAIL id %h", d); end
    wait (m_up && link_up);
    repeat (20) @(posedge clk);
    send_frame();
    bfm.read(REG_STATUS, d);
    checks++; if (d[1:0] != 2'b11) begin failures++; $display("FAIL status %h", d); end
    @(negedge clk) sk0 = skew();
    $display("skew after first frame: %0d cycles", sk0);
    checks++; if (sk0 >= 0 || sk0 < -60) begin failures++; $display("FAIL skew %0d", sk0); end
    bfm.read(REG_TS_CORR, corr);
    for (int i = 0; i < 4; i++) begin
      send_frame();
      @(negedge clk);
      checks++; if (skew() != sk0) begin failures++; $display("FAIL skew %0d vs %0d", skew(), sk0); end
    end
    bfm.read(REG_TS_CORR, d);
    checks++; if (d != corr) begin failures++; $display("FAIL needless corrections"); end
    bfm.read(REG_FRAMES, d);
    checks++; if (d != 5) begin failures++; $display("FAIL frames %0d", d); end
    rd_time(t);
    checks++; if (t[63:32] != 32'h0000_00AB && t[63:32] != 32'h0000_00AC) begin failures++; $display("FAIL ts read %h", t); end
    bfm.write(REG_LAT_COMP, 32'd7);
    send_frame();
    @(negedge clk);
    checks++; if (skew() != sk0 + 7) begin failures++; $display("FAIL lat_comp skew %0d", skew()); end
    bfm.write(REG_CTRL, 32'd0);
    bfm.write(REG_LAT_COMP, 32'd0);
    send_frame();
    @(negedge clk);
    checks++; if (skew() != sk0 + 7 || synced) begin failures++; $display("FAIL applied while disabled"); end
    checks++; if (bfm.timeouts != 0) begin failures++; $display("FAIL wb timeouts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
