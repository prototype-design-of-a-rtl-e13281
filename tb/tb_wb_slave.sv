// tb_wb_slave: Wishbone writes and reads of storage and read-only registers,
// byte selects, reset values, unmapped addresses, write and read strobes, and
// the one-cycle ack.
module tb_wb_slave;
  import tfc_pkg::*;
  localparam int N = 8;
  localparam logic [N-1:0] MASK = 8'b0000_0110;
  localparam logic [N-1:0][31:0] RV = {32'h0, 32'h0, 32'h0, 32'h0, 32'h0, 32'hCAFE_0002, 32'hBEEF_0001, 32'h0};
  logic clk = 0, rst = 1;
  wb_req_t wb_req = '0;
  wb_rsp_t wb_rsp;
  logic [N-1:0][31:0] rd_val, regs;
  logic [N-1:0] wr_stb, rd_stb;
  int checks = 0, failures = 0, wr_pulses = 0, rd_pulses = 0;

  wb_slave #(.N(N), .WR_MASK(MASK), .RST_VAL(RV)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb for (int i = 0; i < N; i++) rd_val[i] = 32'h1000_0000 + i;
  always @(posedge clk) begin
    if (!rst && wr_stb != 0) wr_pulses++;
    if (!rst && rd_stb != 0) rd_pulses++;
  end

  task automatic xfer(input logic we, input int adr, input logic [31:0] dat,
                      input logic [3:0] sel, output logic [31:0] rdat);
    int n = 0;
    wb_req = '{cyc:1'b1, stb:1'b1, we:we, adr:WB_AW'(adr), dat:dat, sel:sel};
    @(posedge clk); #1;
    while (!wb_rsp.ack) begin @(posedge clk); #1; n++; end
    checks++;
    if (n != 0) begin failures++; $display("FAIL ack latency %0d", n); end
    rdat = wb_rsp.dat;
    wb_req = '0;
    @(posedge clk); #1;
  endtask

  task automatic rd_chk(input int adr, input logic [31:0] exp);
    logic [31:0] d;
    xfer(0, adr, 0, 4'hF, d);
    checks++;
    if (d !== exp) begin failures++; $display("FAIL read %0d = %h exp %h", adr, d, exp); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk); #1 rst = 0;
    rd_chk(1, 32'hBEEF_0001);
    rd_chk(2, 32'hCAFE_0002);
    rd_chk(0, 32'h1000_0000);
    rd_chk(5, 32'h1000_0005);
    xfer(1, 1, 32'h1122_3344, 4'hF, d);
    rd_chk(1, 32'h1122_3344);
    xfer(1, 2, 32'hAABB_CCDD, 4'b0101, d);
    rd_chk(2, 32'hCABB_00DD);
    xfer(1, 3, 32'hFFFF_FFFF, 4'hF, d);   // read-only: ignored
    rd_chk(3, 32'h1000_0003);
    rd_chk(40, 32'h0);                     // unmapped
    checks++;
    if (wr_pulses != 2) begin failures++; $display("FAIL wr pulses %0d", wr_pulses); end
    checks++;
    if (rd_pulses != 7) begin failures++; $display("FAIL rd pulses %0d", rd_pulses); end
    checks++;
    if (regs[1] !== 32'h1122_3344) begin failures++; $display("FAIL regs[1]"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
