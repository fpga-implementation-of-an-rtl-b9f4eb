// timestamper_tb: with a 5-cycle tick the timestamp must start at 0 after
// reset, step by exactly one every 5 cycles, and never change in between.
module timestamper_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  ts_t ts;
  int checks = 0, failures = 0;

  timestamper #(.CLK_PER_TICK(5)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (ts !== '0) failures++;
    rst_n = 1;
    for (int c = 1; c <= 5000; c++) begin
      @(posedge clk); #1;
      checks++;
      if (ts !== ts_t'(c / 5)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: ts %0d", c, ts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
