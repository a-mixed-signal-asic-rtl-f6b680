// spi_config_tb: writes every channel register and the global register
// through the serial port, reads them back, checks the decoded ch_cfg /
// gcfg outputs, checks reset values, checks that an aborted frame writes
// nothing, and injects single-bit upsets into stored code words to check
// correction and the status counter at address 65.
`timescale 1ns/1ps
module spi_config_tb;
  import tiger_pkg::*;
  logic clk = 0, rst_n = 0;
  always #3.125 clk = ~clk;  // 160 MHz
  logic sclk, cs_n, mosi, miso;
  ch_cfg_t ch_cfg [N_CH];
  glb_cfg_t gcfg;
  int checks = 0, failures = 0;

  spi_config dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .ch_cfg, .gcfg);
  spi_master_model spi (.sclk, .cs_n, .mosi, .miso);

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

  logic [23:0] shadow [N_CH+1];
  initial begin
    logic [23:0] r;
    #20 rst_n = 1;
    #20;
    chk("reset channel", ch_cfg[5] == ch_cfg_t'(24'h200000));
    chk("reset global: training", gcfg.training == 1 && gcfg.tx_enable == 0);
    for (int a = 0; a <= N_CH; a++) begin
      shadow[a] = 24'($urandom);
      spi.write(7'(a), shadow[a]);
    end
    for (int a = 0; a <= N_CH; a++) begin
      spi.read(7'(a), r);
      chk($sformatf("readback %0d: %h vs %h", a, r, shadow[a]), r == shadow[a]);
    end
    for (int c = 0; c < N_CH; c++)
      chk("ch_cfg output", ch_cfg[c] == ch_cfg_t'(shadow[c]));
    chk("gcfg output", gcfg == glb_cfg_t'(shadow[N_CH]));
    chk("vth fields", ch_cfg[3].vth_t1 == shadow[3][5:0] && ch_cfg[3].vth_t2 == shadow[3][11:6]);
    // aborted write: 20 bits then cs_n high
    spi.cs_n = 0; #100;
    for (int i = 0; i < 20; i++) begin
      spi.mosi = (i == 0) ? 1'b1 : (i == 7 ? 1'b1 : 1'b0);  // write to addr 1
      #50 spi.sclk = 1; #50 spi.sclk = 0;
    end
    #100 spi.cs_n = 1; #300;
    spi.read(7'd1, r);
    chk("aborted frame writes nothing", r == shadow[1]);
    // upsets
    for (int u = 0; u < 10; u++) begin
      int a, b;
      a = $urandom_range(0, N_CH);
      b = $urandom_range(0, 28);
      @(negedge clk);
      force_flip(a, b);
      #20;
    end
    for (int a = 0; a <= N_CH; a++) begin
      spi.read(7'(a), r);
      chk("value survives upsets", r == shadow[a]);
    end
    spi.read(7'd65, r);
    chk($sformatf("status counts 10 corrections (%0d)", r), r == 24'd10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Flip one stored bit of register a (upset injection).
  // The generate scopes can only be named with constant indices, so one
  // process per register waits for the request.
  task automatic force_flip(int a, int b);
    flip_sel = a; flip_bit = b; flip_go = ~flip_go;
  endtask
  int flip_sel, flip_bit;
  logic flip_go = 0;
  for (genvar g = 0; g <= N_CH; g++) begin : g_flip
    always @(flip_go) if (flip_sel == g)
      dut.g_reg[g].u_reg.code_q[flip_bit] = ~dut.g_reg[g].u_reg.code_q[flip_bit];
  end
endmodule
