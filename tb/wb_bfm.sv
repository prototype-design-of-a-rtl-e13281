// wb_bfm: Wishbone bus driver for the testbenches. write() and read() perform
// one classic single access each and wait for the ack (at most 16 cycles; a
// missing ack is counted in timeouts).
module wb_bfm
  import tfc_pkg::*;
(
  input  logic    clk,
  output wb_req_t req,
  input  wb_rsp_t rsp
);
  int timeouts = 0;
  initial req = '0;

  task automatic access(input logic we, input int unsigned adr, input logic [31:0] wdat,
                        output logic [31:0] rdat);
    int n = 0;
    @(negedge clk);
    req = '{cyc:1'b1, stb:1'b1, we:we, adr:WB_AW'(adr), dat:wdat, sel:4'hF};
    @(negedge clk);
    while (!rsp.ack && n < 16) begin @(negedge clk); n++; end
    if (!rsp.ack) timeouts++;
    rdat = rsp.dat;
    req = '0;
  endtask

  task automatic write(input int unsigned adr, input logic [31:0] dat);
    logic [31:0] d;
    access(1'b1, adr, dat, d);
  endtask

  task automatic read(input int unsigned adr, output logic [31:0] dat);
    access(1'b0, adr, '0, dat);
  endtask
endmodule
