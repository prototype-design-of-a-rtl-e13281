// tb_timing_endpoint: a reference "master" time (subcycle, timestamp) runs in
// the testbench and is framed as SOF / upper / lower words; the local counters
// are modelled in the testbench and obey the FSM's reload outputs. After each
// frame the local time (3*timestamp + subcycle) must equal the master time
// plus lat_comp cycles. Also checked: a frame that finds the local time right
// causes no correction; a local drift is corrected and counted; a gap between
// the words is tolerated; the arrival subcycle is captured; nothing is loaded
// when disabled; a broken frame is counted.
module tb_timing_endpoint;
  import tfc_pkg::*;
  logic clk = 0, rst = 1, enable = 1;
  logic [7:0] lat_comp = 0;
  logic rx_valid = 0;
  link_word_t rx_word = W_IDLE;
  logic [1:0] sub, sub_load_val, arr_sub;
  logic [63:0] ts, ts_load_val;
  logic sub_load, ts_load, synced;
  logic [31:0] frames_rcvd, ts_corr, ph_corr;
  logic [15:0] frame_errs;
  int checks = 0, failures = 0;
  logic [1:0] msub = 1;
  logic [63:0] mts = 64'h0123_4567_89AB_CDEF;
  logic skip = 0;

  timing_endpoint dut (.*);
  always #4 clk = ~clk;

  // reference master time and local counters
  logic [1:0] lsub = 2; logic [63:0] lts = 64'd5;
  assign sub = lsub; assign ts = lts;
  always @(posedge clk) begin
    msub <= (msub == 2) ? 2'd0 : msub + 1'b1;
    if (msub == 2) mts <= mts + 1;
    if (sub_load) lsub <= sub_load_val;
    else if (!skip) lsub <= (lsub == 2) ? 2'd0 : lsub + 1'b1;
    if (ts_load) lts <= ts_load_val;
    else if (!skip && lsub == 2) lts <= lts + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned tcyc(input logic [63:0] t, input logic [1:0] s);
    return t * 3 + s;
  endfunction

  task automatic send_frame(input int gap);
    logic [63:0] t;
    logic [1:0] s;
    @(negedge clk);
    rx_valid = 1;
    // the words carry the master time of the SOF cycle
    t = mts; s = msub; rx_word = '{k:1'b1, d:{22'd0, s, 8'hFB}};
    @(negedge clk); rx_word = '{k:1'b0, d:t[63:32]};
    for (int i = 0; i < gap; i++) begin @(negedge clk); rx_valid = 0; end
    @(negedge clk); rx_valid = 1; rx_word = '{k:1'b0, d:t[31:0]};
    @(negedge clk); rx_valid = 0; rx_word = W_IDLE;
  endtask

  task automatic check_aligned(input string what);
    checks++;
    if (tcyc(lts, lsub) != tcyc(mts, msub) + lat_comp) begin
      failures++;
      $display("FAIL %s: local %0d.%0d master %0d.%0d", what, lts, lsub, mts, msub);
    end
  endtask

  initial begin
    logic [31:0] tc, pc;
    repeat (2) @(posedge clk); #1 rst = 0;
    send_frame(0);
    check_aligned("first frame");
    checks++;
    if (!synced || frames_rcvd != 1 || ts_corr != 1) begin failures++; $display("FAIL status after first"); end
    tc = ts_corr; pc = ph_corr;
    repeat (7) @(posedge clk);
    send_frame(2);
    check_aligned("second frame with gap");
    checks++;
    if (ts_corr != tc || ph_corr != pc) begin failures++; $display("FAIL needless correction"); end
    // local drift: lose one fast cycle
    @(negedge clk) skip = 1; @(negedge clk) skip = 0;
    repeat (5) @(posedge clk);
    send_frame(0);
    check_aligned("after drift");
    checks++;
    if (ph_corr != pc + 1) begin failures++; $display("FAIL phase correction not counted"); end
    // latency compensation
    #1 lat_comp = 8'd10;
    send_frame(0);
    check_aligned("lat_comp 10");
    // arrival subcycle capture
    @(negedge clk);
    begin
      logic [1:0] a;
      a = lsub;
      send_frame(0);
      checks++;
      if (arr_sub != ((a + 1) % 3)) begin failures++; $display("FAIL arr_sub %0d", arr_sub); end
    end
    // disabled: drift is not corrected
    #1 enable = 0;
    @(negedge clk) skip = 1; @(negedge clk) skip = 0;
    send_frame(0);
    checks++;
    if (tcyc(lts, lsub) == tcyc(mts, msub) + lat_comp || synced) begin failures++; $display("FAIL corrected while disabled"); end
    // broken frame: control word inside
    @(negedge clk); rx_valid = 1; rx_word = sof_word(0);
    @(negedge clk); rx_word = W_ACK;
    @(negedge clk); rx_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (frame_errs != 1) begin failures++; $display("FAIL frame_errs %0d", frame_errs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
