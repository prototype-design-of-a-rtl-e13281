// tb_timing_master: feeds the FSM a reference subcycle/timestamp sequence and
// checks each frame: SOF, upper word, lower word on consecutive cycles, the SOF
// one cycle after a subcycle-0 cycle and carrying subcycle 0, the two words
// equal to the timestamp of that cycle, frames exactly `period` system ticks
// apart, the frame counter, and silence while disabled.
module tb_timing_master;
  import tfc_pkg::*;
  logic clk = 0, rst = 1, enable = 0;
  logic [31:0] period = 7;
  logic [1:0] sub = 0;
  logic sys_tick;
  logic [63:0] ts = 64'h0000_0001_FFFF_FFF0;
  logic tx_valid;
  link_word_t tx_word;
  logic [31:0] frames_sent;
  int checks = 0, failures = 0, frames = 0, cyc = 0, last_sof = -1;
  logic [63:0] ts_hist [$];
  logic [1:0]  sub_hist [$];

  timing_master dut (.*);
  always #4 clk = ~clk;
  assign sys_tick = (sub == 2);

  always @(posedge clk) begin
    cyc++;
    ts_hist.push_back(ts); sub_hist.push_back(sub);
    if (!rst) begin
      sub <= (sub == 2) ? 2'd0 : sub + 1'b1;
      if (sub == 2) ts <= ts + 1;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame checker
  int state = 0;
  logic [63:0] exp_ts;
  always @(posedge clk) if (!rst) begin
    case (state)
      0: if (tx_valid) begin
        checks++;
        // the cycle before this one is the latch cycle
        if (!is_sof(tx_word) || tx_word.d[9:8] != 0 || sub_hist[cyc-2] != 0) begin
          failures++; $display("FAIL SOF %h", tx_word);
        end
        exp_ts = ts_hist[cyc-2];
        if (last_sof >= 0) begin
          checks++;
          if (cyc - last_sof != 3 * int'(period)) begin
            failures++; $display("FAIL spacing %0d", cyc - last_sof);
          end
        end
        last_sof = cyc;
        state = 1;
      end
      1: begin
        checks++;
        if (!tx_valid || tx_word !== '{k:1'b0, d:exp_ts[63:32]}) begin failures++; $display("FAIL HI %h", tx_word); end
        state = 2;
      end
      2: begin
        checks++;
        if (!tx_valid || tx_word !== '{k:1'b0, d:exp_ts[31:0]}) begin failures++; $display("FAIL LO %h", tx_word); end
        frames++;
        state = 0;
      end
    endcase
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (frames != 0) begin failures++; $display("FAIL frames while disabled"); end
    #1 enable = 1;
    repeat (400) @(posedge clk);
    #1;
    checks++;
    if (frames < 15 || frames_sent != 32'(frames)) begin failures++; $display("FAIL count %0d/%0d", frames, frames_sent); end
    $display("frames %0d", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
