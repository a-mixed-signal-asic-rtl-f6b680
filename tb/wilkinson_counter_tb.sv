// wilkinson_counter_tb: a comparator that fires N cycles after the start
// must give the value N (the comparator is latched on the clock); a
// comparator that never fires must give 1023; 'done' pulses once and
// 'busy' covers the conversion.
module wilkinson_counter_tb;
  logic clk = 0, rst_n = 0, start = 0, comp = 0, busy, done;
  logic [9:0] value;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  wilkinson_counter dut (.clk, .rst_n, .start, .comp_out(comp), .busy, .done, .value);
  initial begin
    #500_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic conv(int n, int expv);
    int cyc = 0, dones = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // comparator output rises at the clock edge after n counted cycles
    while (!done) begin
      @(posedge clk);
      cyc++;
      comp <= (cyc >= n);
      #1;
      if (done) dones++;
    end
    @(posedge clk); #1;
    comp = 0;
    checks++;
    if (value != 10'(expv) || busy) begin
      failures++;
      $display("FAIL n=%0d value=%0d expected %0d", n, value, expv);
    end
    checks++;
    if (dones != 1 || done) begin failures++; $display("FAIL done pulse"); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    conv(1, 1);
    conv(5, 5);
    conv(128, 128);
    for (int i = 0; i < 20; i++) begin
      int n;
      n = $urandom_range(1, 1000);
      conv(n, n);
    end
    conv(5000, 1023);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
