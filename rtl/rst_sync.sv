// rst_sync: brings a reset into another clock domain. Assertion is immediate
// (asynchronous), release is synchronised by STAGES flip-flops of the target
// clock. Used for the transceiver-side halves of the link FIFOs.
module rst_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_in,
  output logic rst_out
);
  logic [STAGES-1:0] sr;
  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) sr <= '1;
    else        sr <= {sr[STAGES-2:0], 1'b0};
  end
  assign rst_out = sr[STAGES-1];
endmodule
