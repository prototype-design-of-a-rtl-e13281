// tb_link_access_unit: two Link Access Units joined by link models, each LAU's
// core clock running at the same 120 MHz but shifted in phase from its
// transceiver clocks. Checks that both links come up, that random user words
// (data and SOF) sent by A arrive at B complete, in order and with a constant
// latency, that the Tx/Rx FIFO counts stay near half depth, that a decode
// error is counted and the link recovers, and that pulling the fibre takes
// the link down.
module tb_link_access_unit;
  import tfc_pkg::*;
  logic rst = 1;
  logic clk_a = 0, clk_b = 0, txc_a = 0, txc_b = 0;
  logic up = 1, inj = 0;
  logic a_txv = 0;
  link_word_t a_txw = W_IDLE, a_gtx, b_gtx, a_rxw, b_rxw;
  gth_rx_t a_grx, b_grx;
  logic a_rxv, b_rxv, a_up, b_up;
  logic [15:0] a_err, b_err;
  logic [4:0] a_tc, a_rc, b_tc, b_rc;
  int checks = 0, failures = 0;
  link_word_t q[$];
  int lat[$];
  int unsigned cyc_b = 0;
  int unsigned sent_at[$];

  always #4.166 clk_a = ~clk_a;
  initial begin #1.3; forever #4.166 txc_a = ~txc_a; end
  initial begin #2.1; forever #4.166 clk_b = ~clk_b; end
  initial begin #0.7; forever #4.166 txc_b = ~txc_b; end

  link_access_unit u_a (.clk(clk_a), .rst, .tx_valid(a_txv), .tx_word(a_txw),
    .rx_valid(a_rxv), .rx_word(a_rxw), .init_done(a_up), .err_count(a_err),
    .tx_fifo_count(a_tc), .rx_fifo_count(a_rc),
    .gth_tx_clk(txc_a), .gth_tx_word(a_gtx), .gth_rx_clk(txc_b), .gth_rx(a_grx));
  link_access_unit u_b (.clk(clk_b), .rst, .tx_valid(1'b0), .tx_word(W_IDLE),
    .rx_valid(b_rxv), .rx_word(b_rxw), .init_done(b_up), .err_count(b_err),
    .tx_fifo_count(b_tc), .rx_fifo_count(b_rc),
    .gth_tx_clk(txc_b), .gth_tx_word(b_gtx), .gth_rx_clk(txc_a), .gth_rx(b_grx));

  gth_link_model #(.LAT(6)) l_ab (.clk(txc_a), .up, .inject_err(inj), .tx_word(a_gtx), .rx(b_grx));
  gth_link_model #(.LAT(6)) l_ba (.clk(txc_b), .up, .inject_err(1'b0), .tx_word(b_gtx), .rx(a_grx));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cyc_a = 0;
  always @(posedge clk_a) cyc_a++;
  always @(posedge clk_b) cyc_b++;

  always @(posedge clk_a) if (!rst && a_txv && a_up) begin
    q.push_back(a_txw);
    sent_at.push_back(cyc_a);
  end

  int n_rx = 0;
  always @(posedge clk_b) if (!rst && b_rxv) begin
    checks++;
    n_rx++;
    if (q.size() == 0 || b_rxw !== q[0]) begin
      failures++; $display("FAIL rx %h exp %h", b_rxw, q.size() ? q[0] : W_IDLE);
    end else begin
      lat.push_back(int'(cyc_b) - int'(sent_at[0]));
      void'(q.pop_front()); void'(sent_at.pop_front());
    end
  end

  task automatic wait_up(input string what);
    int n = 0;
    while (!(a_up && b_up) && n < 400) begin @(posedge clk_a); n++; end
    checks++;
    if (!(a_up && b_up)) begin failures++; $display("FAIL %s: link not up", what); end
    else $display("%s: link up after %0d cycles", what, n);
  endtask

  initial begin
    #100 rst = 0;
    wait_up("initial");
    repeat (10) @(posedge clk_a);
    for (int i = 0; i < 300; i++) begin
      @(negedge clk_a);
      a_txv = ($urandom_range(0, 2) != 0);
      a_txw = (i % 50 == 0) ? sof_word(2'(i % 3)) : '{k:1'b0, d:$urandom};
    end
    @(negedge clk_a) a_txv = 0;
    repeat (60) @(posedge clk_b);
    checks++;
    if (q.size() != 0 || n_rx < 150) begin failures++; $display("FAIL lost %0d words, got %0d", q.size(), n_rx); end
    checks++;
    foreach (lat[i]) if (lat[i] != lat[0]) begin
      failures++; $display("FAIL latency varies %0d vs %0d", lat[i], lat[0]); break;
    end
    $display("word latency A core -> B core: %0d cycles", lat.size() ? lat[0] : -1);
    checks++;
    if (a_tc < 6 || a_tc > 13 || b_rc < 6 || b_rc > 13) begin
      failures++; $display("FAIL fifo counts tx %0d rx %0d", a_tc, b_rc);
    end
    // decode error
    @(negedge txc_a) inj = 1; @(negedge txc_a) inj = 0;
    repeat (40) @(posedge clk_b);
    checks++;
    if (b_err != 1) begin failures++; $display("FAIL err count %0d", b_err); end
    wait_up("after error");
    // fibre pulled
    up = 0;
    repeat (120) @(posedge clk_b);
    checks++;
    if (b_up || a_up) begin failures++; $display("FAIL link still up without fibre"); end
    up = 1;
    wait_up("after reconnect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
