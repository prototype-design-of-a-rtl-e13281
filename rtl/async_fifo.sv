// async_fifo: dual-clock FIFO used as the Tx FIFO and Rx FIFO of the Link
// Access Unit, crossing between the core clock and a transceiver user clock.
//
// Classic structure: a 2**AW-entry memory, binary pointers with one extra wrap
// bit, Gray-coded copies passed through two-flop synchronisers to the other
// side. full/wcount are seen by the writer, empty/rcount by the reader; each
// count is exact on its own side and pessimistic by the synchroniser delay for
// the other side's updates. Reading is first-word-fall-through: rdata holds the
// head word whenever empty is low and rd_en pops it. Writes to a full FIFO and
// reads of an empty one are ignored. The FIFOs and their counts are shown in
// the paper's link figure; the internal structure and depth are this design's.
module async_fifo #(
  parameter int unsigned WIDTH = 33,
  parameter int unsigned AW    = 4
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  output logic [AW:0]      wcount,

  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic [AW:0]      rcount
);
  logic [WIDTH-1:0] mem [2**AW];

  logic [AW:0] wptr, rptr, wgray, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] rptr_w, wptr_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // Write side
  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr  <= '0;
      wgray <= '0;
    end else if (wr_en && !full) begin
      wptr  <= wptr + 1'b1;
      wgray <= bin2gray(wptr + 1'b1);
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  assign rptr_w = gray2bin(rgray_w2);
  assign wcount = wptr - rptr_w;
  assign full   = (wcount == (AW+1)'(2**AW));

  // Read side
  always_ff @(posedge rclk) begin
    if (rrst) begin
      rptr  <= '0;
      rgray <= '0;
    end else if (rd_en && !empty) begin
      rptr  <= rptr + 1'b1;
      rgray <= bin2gray(rptr + 1'b1);
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign wptr_r = gray2bin(wgray_r2);
  assign rcount = wptr_r - rptr;
  assign empty  = (rcount == '0);
  assign rdata  = mem[rptr[AW-1:0]];
endmodule
