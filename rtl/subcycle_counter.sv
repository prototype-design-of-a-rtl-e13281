// subcycle_counter: labels every 120 MHz transport-clock edge with its position
// inside the 40 MHz system period.
//
// The counter runs at f_tr and counts 0 .. SUBCYCLES-1 (f_tr/f_sys = 3), so the
// value tells which fast edge the slow clock is aligned to. sys_tick is high in
// the last subcycle; it is the one-in-three enable of all 40 MHz logic of a
// core. A reload (load/load_val) sets the value the counter takes in the next
// cycle; the timing endpoint uses it to align the system-clock phase to the
// master. Latency: load_val appears on sub one cycle after load.
// The subcycle concept and the ratio follow the paper; the reload port and the
// reset value 0 are this design's choices.
module subcycle_counter #(
  parameter int unsigned SUBCYCLES = 3,
  localparam int unsigned W = (SUBCYCLES > 1) ? $clog2(SUBCYCLES) : 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [W-1:0] load_val,
  output logic [W-1:0] sub,
  output logic         sys_tick
);
  localparam logic [W-1:0] LAST = W'(SUBCYCLES - 1);

  always_ff @(posedge clk) begin
    if (rst)               sub <= '0;
    else if (load)         sub <= (load_val > LAST) ? '0 : load_val;
    else if (sub == LAST)  sub <= '0;
    else                   sub <= sub + 1'b1;
  end

  assign sys_tick = (sub == LAST);
endmodule
