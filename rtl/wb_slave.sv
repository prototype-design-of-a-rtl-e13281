// wb_slave: Wishbone register file through which software controls and
// monitors a TFC core.
//
// Classic single-access Wishbone, 32-bit data, word addresses. A request
// (cyc & stb) is answered with ack in the next cycle, and ack drops for one
// cycle before the next access is taken. Registers whose bit is set in WR_MASK
// are storage: writes update them byte by byte under sel, reset loads RST_VAL,
// and each write gives a one-cycle wr_stb pulse together with the update.
// Other addresses read rd_val, supplied by the core; rd_stb marks, in the
// cycle the read value is sampled, which register is being read, so a core
// can snapshot wide values. Unmapped addresses read zero and ignore writes.
// The paper says the cores are controlled over Wishbone; the register map and
// the timing of the handshake are this design's.
module wb_slave
  import tfc_pkg::*;
#(
  parameter int unsigned               N = 17,
  parameter logic [N-1:0]              WR_MASK = '0,
  parameter logic [N-1:0][31:0]        RST_VAL = '0
) (
  input  logic                clk,
  input  logic                rst,
  input  wb_req_t             wb_req,
  output wb_rsp_t             wb_rsp,
  input  logic [N-1:0][31:0]  rd_val,
  output logic [N-1:0][31:0]  regs,
  output logic [N-1:0]        wr_stb,
  output logic [N-1:0]        rd_stb
);
  logic access;
  logic hit;
  assign access = wb_req.cyc && wb_req.stb && !wb_rsp.ack;
  assign hit    = (32'(wb_req.adr) < N);

  always_comb begin
    rd_stb = '0;
    if (access && !wb_req.we && hit) rd_stb[wb_req.adr] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_rsp <= '0;
      regs   <= RST_VAL;
      wr_stb <= '0;
    end else begin
      wr_stb     <= '0;
      wb_rsp.ack <= access;
      if (access) begin
        if (wb_req.we) begin
          if (hit && WR_MASK[wb_req.adr]) begin
            for (int b = 0; b < 4; b++)
              if (wb_req.sel[b]) regs[wb_req.adr][8*b +: 8] <= wb_req.dat[8*b +: 8];
            wr_stb[wb_req.adr] <= 1'b1;
          end
          wb_rsp.dat <= '0;
        end else if (hit) begin
          wb_rsp.dat <= WR_MASK[wb_req.adr] ? regs[wb_req.adr] : rd_val[wb_req.adr];
        end else begin
          wb_rsp.dat <= '0;
        end
      end
    end
  end

  // Handshake rules: an ack answers a request, and never two in a row.
  a_ack_answers: assert property (@(posedge clk) disable iff (rst)
    access |=> wb_rsp.ack);
  a_ack_single:  assert property (@(posedge clk) disable iff (rst)
    wb_rsp.ack |=> !wb_rsp.ack);
endmodule
