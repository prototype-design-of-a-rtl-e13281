// tb_lau_protocol_checker: presents legal and illegal words and checks
// word_err, data_valid (only for data and SOF words while the link is up) and
// the error count against expectations worked out per word.
module tb_lau_protocol_checker;
  import tfc_pkg::*;
  logic clk = 0, rst = 1, rx_valid = 0, rx_code_err = 0, init_done = 0;
  link_word_t rx_word = W_IDLE;
  logic data_valid, word_err;
  logic [15:0] err_count;
  int checks = 0, failures = 0, n_err = 0;

  lau_protocol_checker dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input link_word_t w, input logic v, input logic ce, input logic up,
                     input logic exp_err, input logic exp_dv);
    rx_word = w; rx_valid = v; rx_code_err = ce; init_done = up;
    #1;
    checks++;
    if (word_err !== exp_err || data_valid !== exp_dv) begin
      failures++;
      $display("FAIL w=%h v=%0b ce=%0b up=%0b err=%0b dv=%0b", w, v, ce, up, word_err, data_valid);
    end
    if (exp_err) n_err++;
    @(posedge clk); #1;
    checks++;
    if (err_count !== 16'(n_err)) begin failures++; $display("FAIL count %0d exp %0d", err_count, n_err); end
  endtask

  initial begin
    @(posedge clk); #1 rst = 0;
    put(W_IDLE, 1, 0, 1, 0, 0);
    put(W_INIT, 1, 0, 0, 0, 0);
    put(W_ACK,  1, 0, 1, 0, 0);
    put('{k:1'b0, d:32'h1234_5678}, 1, 0, 1, 0, 1);
    put('{k:1'b0, d:32'h1234_5678}, 1, 0, 0, 0, 0);
    put(sof_word(2'd2), 1, 0, 1, 0, 1);
    put('{k:1'b1, d:32'h0000_04FB}, 1, 0, 1, 1, 0);   // SOF with reserved bit set
    put('{k:1'b1, d:32'hDEAD_00BC}, 1, 0, 1, 1, 0);   // unknown control word
    put('{k:1'b0, d:32'h0}, 1, 1, 1, 1, 0);            // decode error
    put('{k:1'b1, d:32'hDEAD_00BC}, 0, 0, 1, 0, 0);   // not valid: ignored
    for (int i = 0; i < 40; i++) begin
      logic [31:0] d = $urandom;
      logic k = 1'($urandom);
      link_word_t w = '{k:k, d:d};
      logic legal = !k || d == K_IDLE || d == K_INIT || d == K_ACK || is_sof(w);
      put(w, 1, 0, 1, !legal, legal && (!k || is_sof(w)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
