// tb_subcycle_counter: checks the subcycle counter against a reference count
// modulo 3: the free-running sequence, sys_tick in the last subcycle, reloads
// (including an out-of-range value, which gives 0) and reset.
module tb_subcycle_counter;
  logic clk = 0, rst = 1, load = 0;
  logic [1:0] load_val = 0, sub;
  logic sys_tick;
  int checks = 0, failures = 0;
  int unsigned ref_sub;

  subcycle_counter #(.SUBCYCLES(3)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int unsigned exp);
    checks++;
    if (sub !== 2'(exp) || sys_tick !== (exp == 2)) begin
      failures++;
      $display("FAIL t=%0t sub=%0d tick=%0b exp=%0d", $time, sub, sys_tick, exp);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    ref_sub = 0;
    for (int i = 0; i < 300; i++) begin
      chk(ref_sub);
      if (i % 37 == 5) begin
        load = 1;
        load_val = 2'($urandom_range(0, 3));
        @(posedge clk); #1;
        load = 0;
        ref_sub = (load_val > 2) ? 0 : load_val;
      end else begin
        @(posedge clk); #1;
        ref_sub = (ref_sub + 1) % 3;
      end
    end
    rst = 1; @(posedge clk); #1; rst = 0;
    chk(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
