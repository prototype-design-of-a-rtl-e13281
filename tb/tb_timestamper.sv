// tb_timestamper: drives random ticks and loads and compares the 64-bit
// count against a reference model; a preset near 2**64 checks the carry and
// wrap-around, and a simultaneous load and tick checks load priority.
module tb_timestamper;
  logic clk = 0, rst = 1, tick = 0, load = 0;
  logic [63:0] load_val = 0, ts, ref_ts;
  int checks = 0, failures = 0;

  timestamper #(.TS_W(64)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 0; ref_ts = 0;
    for (int i = 0; i < 2000; i++) begin
      tick = ($urandom_range(0, 2) == 0);
      load = (i % 211 == 7) || (i == 1000);
      load_val = (i == 1000) ? 64'hFFFF_FFFF_FFFF_FFFE : {$urandom, $urandom};
      @(posedge clk); #1;
      if (load) ref_ts = load_val;
      else if (tick) ref_ts = ref_ts + 1;
      checks++;
      if (ts !== ref_ts) begin
        failures++;
        $display("FAIL i=%0d ts=%h exp=%h", i, ts, ref_ts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
