// coarse_counter_tb: the coarse counter must count one per clock from 0
// after reset and wrap from 2^16-1 to 0.
module coarse_counter_tb;
  logic clk = 0, rst_n = 0;
  logic [15:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  coarse_counter dut (.clk, .rst_n, .count);
  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int expv;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (count != 0) failures++;
    rst_n = 1;
    expv = 0;
    for (int i = 0; i < 70000; i++) begin
      @(posedge clk); #1;
      expv = (expv + 1) % 65536;
      checks++;
      if (count != 16'(expv)) begin
        failures++;
        if (failures < 5) $display("FAIL count %0d expected %0d", count, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
