// tb_async_fifo: writes random words with random enables from one clock and
// reads them with random enables on an unrelated clock; every word read must
// equal the next word of a reference queue, no accepted word may be lost, and
// the counts must stay within the depth and reach full.
module tb_async_fifo;
  localparam int AW = 4, W = 33;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wdata = 0, rdata;
  logic [AW:0] wcount, rcount;
  int checks = 0, failures = 0, n_read = 0, saw_full = 0;
  logic [W-1:0] q[$];

  async_fifo #(.WIDTH(W), .AW(AW)) dut (.*);

  always #4 wclk = ~wclk;
  always #7 rclk = ~rclk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) if (!wrst) begin
    if (wr_en && !full) q.push_back(wdata);
    if (full) saw_full = 1;
    if (wcount > 16) begin failures++; $display("FAIL wcount %0d", wcount); end
    wr_en <= ($urandom_range(0, 3) != 0);
    wdata <= {1'($urandom), $urandom};
  end

  always @(posedge rclk) if (!rrst) begin
    if (rd_en && !empty) begin
      checks++;
      if (q.size() == 0 || rdata !== q[0]) begin
        failures++;
        $display("FAIL read %h exp %h", rdata, (q.size() ? q[0] : '0));
      end
      if (q.size()) void'(q.pop_front());
      n_read++;
    end
    rd_en <= (n_read < 1000) ? ($urandom_range(0, 4) != 0) : 1'b1;
  end

  initial begin
    #50 wrst = 0; rrst = 0;
    wait (n_read >= 1500);
    checks++;
    if (!saw_full) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
