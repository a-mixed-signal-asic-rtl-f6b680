// enc8b10b_tb: checks the 8B/10B encoder against published code words, a
// reference encoder and the code's line properties (disparity of each
// symbol 0 or +-2 matching the running disparity, at most five equal bits
// in a row, comma pattern only inside K28.5) over a random byte stream
// and over all 256 bytes in both disparities.
module enc8b10b_tb;
  import ref8b10b_pkg::*;
  logic clk = 0, rst_n = 0, ce = 0, k = 0;
  logic [7:0] data = 0;
  logic [9:0] code;
  logic rd_pos;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  enc8b10b dut (.clk, .rst_n, .ce, .data, .k, .code, .rd_pos);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [10:0] r;
  logic rd;
  logic [39:0] hist;  // last bits on the line
  int run;
  logic last_bit;

  task automatic send(logic [7:0] dv, logic kv);
    rd = rd_pos;
    data = dv; k = kv; ce = 1;
    @(posedge clk); #1;
    ce = 0;
    r = enc(dv, kv, rd);
    chk($sformatf("code %s%0d.%0d rd=%0d", kv ? "K" : "D", dv[4:0], dv[7:5], rd), code == r[9:0]);
    chk("rd update", rd_pos == r[10]);
    chk("symbol disparity", rd ? (disp(code, 10) inside {0, -2}) : (disp(code, 10) inside {0, 2}));
    for (int i = 9; i >= 0; i--) begin
      if (code[i] == last_bit) run++; else run = 1;
      last_bit = code[i];
      if (run > 5) begin failures++; $display("FAIL run length"); end
      hist = {hist[38:0], code[i]};
      // comma 0011111 / 1100000 must end at bit 'e'-'i' boundary of a K28.5
      if ((hist[6:0] == 7'b0011111 || hist[6:0] == 7'b1100000) && !(kv && i == 3)) begin
        failures++; $display("FAIL comma outside K28.5");
      end
    end
  endtask

  initial begin
    hist = '0; run = 0; last_bit = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    chk("reset RD negative", rd_pos == 0);
    // Published code words
    send(8'hBC, 1); chk("K28.5 RD- = 0011111010", code == 10'b0011111010);
    send(8'hBC, 1); chk("K28.5 RD+ = 1100000101", code == 10'b1100000101);
    send(8'h00, 0); chk("D0.0 RD- = 1001110100", code == 10'b1001110100);
    send(8'hB5, 0); chk("D21.5 = 1010101010", code == 10'b1010101010);
    send(8'hBC, 1);
    send(8'h00, 0); chk("D0.0 RD+ = 0110001011", code == 10'b0110001011);
    // Every byte, both disparities: send each twice with a disparity flip
    for (int v = 0; v < 256; v++) begin
      send(8'(v), 0);
      send(8'hBC, 1);
      send(8'(v), 0);
    end
    // Random stream with occasional commas
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 9) == 0) send(8'hBC, 1);
      else send(8'($urandom), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
