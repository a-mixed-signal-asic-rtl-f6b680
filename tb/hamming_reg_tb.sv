// hamming_reg_tb: writes random words, reads them back, then flips every
// single stored bit in turn (as an upset would) and checks that the
// output stays correct, that 'corrected' reports it and that the stored
// word is scrubbed back so that a second upset later is corrected too.
// The reference code word is built here from the Hamming definition.
module hamming_reg_tb;
  localparam int DW = 24, P = 5, N = 29;
  logic clk = 0, rst_n = 0, we = 0, corrected;
  logic [DW-1:0] wdata = 0, q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  hamming_reg #(.DW(DW), .RST_VAL(24'h200000)) dut (.clk, .rst_n, .we, .wdata, .q, .corrected);
  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  // Reference: parity bit j covers positions with bit j set.
  function automatic logic [N-1:0] ref_code(logic [DW-1:0] d);
    logic [N-1:0] c = '0;
    int k = 0;
    for (int pos = 1; pos <= N; pos++)
      if (!(pos == 1 || pos == 2 || pos == 4 || pos == 8 || pos == 16)) c[pos-1] = d[k++];
    for (int j = 0; j < P; j++)
      for (int pos = 1; pos <= N; pos++)
        if (pos[j] && pos != (1 << j)) c[(1 << j) - 1] ^= c[pos-1];
    return c;
  endfunction
  initial begin
    logic [DW-1:0] v;
    repeat (2) @(posedge clk); #1;
    chk("reset value", q == 24'h200000);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      v = 24'($urandom);
      @(negedge clk); we = 1; wdata = v;
      @(negedge clk); we = 0;
      chk("readback", q == v);
      chk("stored code", dut.code_q == ref_code(v));
      for (int b = 0; b < N; b++) begin
        @(negedge clk);
        dut.code_q[b] = ~dut.code_q[b];
        #1;
        chk($sformatf("corrected output bit %0d", b), q == v);
        @(negedge clk);
        chk("scrubbed", dut.code_q == ref_code(v));
        chk("correction reported", corrected == 1'b1);
      end
    end
    @(negedge clk);
    chk("no correction without an upset", corrected == 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
