// tb_lau_init_fsm: two initialisation FSMs talk to each other over a short
// delay line. Checks that both reach init_done within a bound and that each
// side's transmit words go INIT -> ACK -> IDLE without skipping; that a
// protocol error on one side makes it restart and both come up again; and
// that a silent receive direction is detected by the timeout.
module tb_lau_init_fsm;
  import tfc_pkg::*;
  logic clk = 0, rst = 1;
  link_word_t a_tx, b_tx, a_rx, b_rx;
  logic a_rxv, b_rxv, a_err = 0, a_up, b_up;
  link_word_t dab [3], dba [3];
  logic b_silent = 0;
  int checks = 0, failures = 0, cyc = 0;

  lau_init_fsm #(.N_CONFIRM(8), .RX_TIMEOUT(64)) u_a (
    .clk, .rst, .rx_valid(a_rxv), .rx_word(a_rx), .rx_err(a_err), .tx_word(a_tx), .init_done(a_up));
  lau_init_fsm #(.N_CONFIRM(8), .RX_TIMEOUT(64)) u_b (
    .clk, .rst, .rx_valid(b_rxv), .rx_word(b_rx), .rx_err(1'b0), .tx_word(b_tx), .init_done(b_up));

  always #4 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    dab[0] <= a_tx; dab[1] <= dab[0]; dab[2] <= dab[1];
    dba[0] <= b_tx; dba[1] <= dba[0]; dba[2] <= dba[1];
  end
  assign b_rx = dab[2];
  assign a_rx = dba[2];
  assign b_rxv = !rst;
  assign a_rxv = !rst && !b_silent;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word order: INIT -> ACK -> IDLE only, unless restarting to INIT
  link_word_t a_prev;
  always @(posedge clk) if (!rst) begin
    if (a_prev == W_INIT && a_tx == W_IDLE) begin failures++; $display("FAIL INIT->IDLE"); end
    if (a_tx != W_INIT && a_tx != W_ACK && a_tx != W_IDLE) begin failures++; $display("FAIL word"); end
    a_prev <= a_tx;
  end

  task automatic wait_up(input int bound, input string what);
    int n = 0;
    while (!(a_up && b_up) && n < bound) begin @(posedge clk); n++; end
    checks++;
    if (!(a_up && b_up)) begin failures++; $display("FAIL %s: not up after %0d", what, n); end
    else $display("%s: up after %0d cycles", what, n);
  endtask

  initial begin
    a_prev = W_INIT;
    for (int i = 0; i < 3; i++) begin dab[i] = W_IDLE; dba[i] = W_IDLE; end
    repeat (2) @(posedge clk); #1 rst = 0;
    checks++;
    if (a_tx !== W_INIT) begin failures++; $display("FAIL first word"); end
    wait_up(100, "initial");
    repeat (20) @(posedge clk);
    #1 a_err = 1; @(posedge clk); #1 a_err = 0;
    checks++;
    if (a_up) begin failures++; $display("FAIL error did not drop link"); end
    wait_up(100, "after error");
    #1 b_silent = 1;
    repeat (70) @(posedge clk);
    checks++;
    if (a_up) begin failures++; $display("FAIL timeout not detected"); end
    #1 b_silent = 0;
    wait_up(100, "after silence");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
