// timestamper: the 64-bit local timestamp counter of a TFC node.
//
// It advances by one per 40 MHz system period. The core runs on the 120 MHz
// clock, so the counter is enabled by tick (the last subcycle of each period,
// from subcycle_counter) rather than clocked by a separate 40 MHz clock. A load
// (from software or the timing endpoint FSM) sets the value for the next cycle
// and wins over the increment. The width and the 40 MHz rate follow the paper;
// the clock-enable scheme, load priority and reset to zero are this design's.
module timestamper #(
  parameter int unsigned TS_W = 64
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            tick,
  input  logic            load,
  input  logic [TS_W-1:0] load_val,
  output logic [TS_W-1:0] ts
);
  always_ff @(posedge clk) begin
    if (rst)       ts <= '0;
    else if (load) ts <= load_val;
    else if (tick) ts <= ts + 1'b1;
  end
endmodule
