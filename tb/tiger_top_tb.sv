// tiger_top_tb: end-to-end test of the whole chip at its full size
// (64 channels, default parameters).
//
// Every channel's two branches are modelled by tac_sh_model; the
// configuration is written through the serial port with
// spi_master_model; both output links are decoded with link_rx_model.
// After configuration (even channels in S/H mode, odd ones in ToT mode,
// channel 62 triggered by the test pulse) the links leave training and
// hits are fired on random channels at random sub-nanosecond phases. Each
// event received is matched against the expectation computed here from
// the hit times: channel, coarse time, fine time (+-1), end time and
// charge value. Also exercised and counted: link training, test-pulse
// triggering, ToT timeout (channel 61), buffer overflow with a lost
// trigger (channel 60), and correction of an injected configuration
// upset. A mechanism that never happened counts as a failure.
`timescale 1ps/1ps
module tiger_top_tb;
  import tiger_pkg::*;
  localparam int T = 6250;
  localparam int WIN = 32;

  logic clk = 0, rst_n = 0;
  always #(T/2) clk = ~clk;
  logic [15:0] cyc;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) cyc <= '0; else cyc <= cyc + 1'b1;

  logic sclk, cs_n, mosi, miso, tp = 0;
  logic tp_fe [N_CH];
  logic [5:0] tp_amp;
  logic disc_t [N_CH], disc_e [N_CH];
  logic [VTH_W-1:0] vth_t1 [N_CH], vth_t2 [N_CH];
  logic [1:0] dac_range;
  logic trig_t [N_CH], trig_e [N_CH], sh_sample [N_CH], e_src_sh [N_CH];
  logic conv_en [N_CH], tac_rst [N_CH], comp_t [N_CH], comp_e [N_CH];
  logic [TAC_W-1:0] arm_sel [N_CH], conv_sel [N_CH];
  logic [LINK_BPC-1:0] tx [N_LINKS];
  int amp [N_CH];

  tiger_top dut (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .tp, .tp_fe, .tp_amp,
    .disc_t, .disc_e, .vth_t1, .vth_t2, .dac_range,
    .trig_t, .trig_e, .arm_sel, .sh_sample, .e_src_sh, .conv_en, .conv_sel, .tac_rst,
    .comp_out_t(comp_t), .comp_out_e(comp_e), .tx
  );
  spi_master_model spi (.sclk, .cs_n, .mosi, .miso);

  for (genvar c = 0; c < N_CH; c++) begin : g_afe
    tac_sh_model m_t (.clk, .trig(trig_t[c]), .arm_sel(arm_sel[c]), .sh_sample(1'b0),
                      .e_src_sh(1'b0), .conv_en(conv_en[c]), .conv_sel(conv_sel[c]),
                      .tac_rst(tac_rst[c]), .amplitude(0), .comp_out(comp_t[c]));
    tac_sh_model m_e (.clk, .trig(trig_e[c]), .arm_sel(arm_sel[c]), .sh_sample(sh_sample[c]),
                      .e_src_sh(e_src_sh[c]), .conv_en(conv_en[c]), .conv_sel(conv_sel[c]),
                      .tac_rst(tac_rst[c]), .amplitude(amp[c]), .comp_out(comp_e[c]));
  end

  logic stb [N_LINKS];
  logic [63:0] word [N_LINKS];
  int nc [N_LINKS], ne [N_LINKS], nv [N_LINKS];
  for (genvar l = 0; l < N_LINKS; l++) begin : g_rx
    link_rx_model rx (.clk, .rst_n, .tx(tx[l]), .evt_stb(stb[l]), .evt_word(word[l]),
                      .n_comma(nc[l]), .n_err(ne[l]), .n_evt(nv[l]));
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(400_000 * T);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- expectations
  typedef struct {
    int ch, tcoarse, tfine, ecoarse, efine, mode, timeout;
    bit fine_e_tol;
  } exp_t;
  exp_t expq [$];
  int outstanding [N_CH];
  bit busy [N_CH];
  int n_recv = 0, n_sh = 0, n_tot = 0, n_tp = 0, n_tmo = 0, n_lost = 0, n_ovf_evt = 0;

  function automatic int fine_of(realtime t);
    longint tn;
    tn = ((longint'(t) - T/2) / T + 1) * T + T/2;
    return int'($floor(128.0 * real'(tn - longint'(t)) / real'(T)));
  endfunction

  function automatic bit near(int a, int b, int tol);
    return a >= b - tol && a <= b + tol;
  endfunction

  always @(posedge clk) begin
    for (int l = 0; l < N_LINKS; l++) if (stb[l]) begin
      event_t e;
      int hit;
      e = event_t'(word[l]);
      n_recv++;
      if (e.lost) n_lost++;
      if (e.channel == 6'd60) n_ovf_evt++;
      else begin
        hit = -1;
        foreach (expq[i])
          if (hit < 0 && expq[i].ch == int'(e.channel) && expq[i].tcoarse == int'(e.tcoarse)) hit = i;
        if (hit < 0) chk($sformatf("unexpected event ch %0d tcoarse %0d", e.channel, e.tcoarse), 0);
        else begin
          exp_t x;
          x = expq[hit];
          expq.delete(hit);
          outstanding[x.ch]--;
          chk($sformatf("ch %0d tfine %0d vs %0d", x.ch, e.tfine, x.tfine), near(int'(e.tfine), x.tfine, 1));
          chk($sformatf("ch %0d ecoarse %0d vs %0d", x.ch, e.ecoarse, x.ecoarse), int'(e.ecoarse) == x.ecoarse);
          chk($sformatf("ch %0d efine %0d vs %0d", x.ch, e.efine, x.efine),
              near(int'(e.efine), x.efine, x.fine_e_tol ? 1 : 0));
          chk("mode", int'(e.mode) == x.mode);
          chk("timeout flag", int'(e.timeout) == x.timeout);
          if (x.timeout) n_tmo++;
        end
      end
    end
  end

  // ---------------- stimulus
  task automatic hit_sh(int c, int off, int a);
    exp_t x;
    @(posedge clk);
    #(off);
    amp[c] = a;
    disc_t[c] = 1;
    x.ch = c; x.tcoarse = (int'(cyc) + 1) & 16'hFFFF; x.tfine = fine_of($realtime);
    x.ecoarse = (x.tcoarse + WIN + 1) & 16'hFFFF; x.efine = a; x.mode = 0; x.timeout = 0;
    x.fine_e_tol = 0;
    expq.push_back(x);
    #(40_000) disc_t[c] = 0;
    repeat (WIN + 4) @(posedge clk);
    n_sh++;
  endtask

  task automatic hit_tot(int c, int off, int len, int off2, bit use_tp);
    exp_t x;
    @(posedge clk);
    #(off);
    if (use_tp) tp = 1; else disc_t[c] = 1;
    x.ch = c; x.tcoarse = (int'(cyc) + 1) & 16'hFFFF; x.tfine = fine_of($realtime);
    if (use_tp) begin
      #1;
      chk("test pulse reaches the front-end of channel 62", tp_fe[62] == 1 && tp_fe[0] == 0);
    end
    #(20_000) if (!use_tp) disc_e[c] = 1;
    repeat (len) @(posedge clk);
    #(off2);
    if (use_tp) tp = 0; else begin disc_e[c] = 0; disc_t[c] = 0; end
    x.ecoarse = (int'(cyc) + 1) & 16'hFFFF; x.efine = fine_of($realtime);
    x.mode = 1; x.timeout = 0; x.fine_e_tol = 1;
    expq.push_back(x);
    repeat (4) @(posedge clk);
    if (use_tp) n_tp++; else n_tot++;
  endtask

  logic [23:0] rd;
  initial begin
    for (int c = 0; c < N_CH; c++) begin
      disc_t[c] = 0; disc_e[c] = 0; amp[c] = 0; outstanding[c] = 0; busy[c] = 0;
    end
    #(10 * T) rst_n = 1;
    #(100 * T);
    // links train after reset
    chk("links train after reset", nc[0] > 3 && nc[1] > 3 && nv[0] == 0 && nv[1] == 0);
    // configure all channels
    for (int c = 0; c < N_CH; c++) begin
      ch_cfg_t cfg;
      cfg = '0;
      cfg.enable = 1; cfg.sh_window = 8'(WIN);
      cfg.vth_t1 = 6'(c); cfg.vth_t2 = 6'(63 - c);
      cfg.mode = (c % 2 == 1 || c == 62) ? MODE_TOT : MODE_SH;
      if (c == 62) begin cfg.tp_tdc = 1; cfg.tp_fe = 1; end
      spi.write(7'(c), 24'(cfg));
    end
    spi.write(7'd64, 24'h000150);  // tp_amp = 21, dac_range = 0, tx off, training
    chk("threshold codes reach the DACs", vth_t1[17] == 6'd17 && vth_t2[17] == 6'd46);
    chk("tp amplitude", tp_amp == 6'd21);
    repeat (50) @(posedge clk);
    chk("no events while training", nv[0] == 0 && nv[1] == 0);
    spi.write(7'd64, 24'h000152);  // tx_enable, training off
    // upset in a configuration register, corrected and counted
    dut.u_cfg.g_reg[5].u_reg.code_q[7] = ~dut.u_cfg.g_reg[5].u_reg.code_q[7];
    // random hits on channels 0..59
    for (int i = 0; i < 200; i++) begin
      int c;
      do c = $urandom_range(0, 59); while (outstanding[c] >= 3 || busy[c]);
      outstanding[c]++;
      busy[c] = 1;
      fork
        automatic int cc = c;
        automatic int off = 1 + $urandom_range(0, T - 2);
        automatic int a = $urandom_range(5, 400);
        automatic int len = $urandom_range(5, 40);
        automatic int off2 = 1 + $urandom_range(0, T - 2);
        begin
          if (cc % 2 == 0) hit_sh(cc, off, a);
          else hit_tot(cc, off, len, off2, 0);
          busy[cc] = 0;
        end
      join_none
      repeat ($urandom_range(5, 60)) @(posedge clk);
    end
    // test pulse on channel 62
    for (int i = 0; i < 4; i++) begin
      outstanding[62]++;
      hit_tot(62, 1 + $urandom_range(0, T - 2), 10, 1 + $urandom_range(0, T - 2), 1);
      repeat (200) @(posedge clk);
    end
    // ToT timeout on channel 61: the E discriminator never fires
    begin
      exp_t x;
      @(posedge clk); #(2345);
      disc_t[61] = 1;
      x.ch = 61; x.tcoarse = (int'(cyc) + 1) & 16'hFFFF; x.tfine = fine_of($realtime);
      x.ecoarse = (x.tcoarse + 2 + 1023) & 16'hFFFF; x.efine = 1023;
      x.mode = 1; x.timeout = 1; x.fine_e_tol = 0;
      expq.push_back(x);
      #(50_000) disc_t[61] = 0;
    end
    // overflow on channel 60: six quick hits with long conversions
    for (int i = 0; i < 6; i++) begin
      @(posedge clk); #(1000);
      amp[60] = 900;
      disc_t[60] = 1; #(30_000) disc_t[60] = 0;
      repeat (WIN + 6) @(posedge clk);
    end
    repeat (6000) @(posedge clk);
    // one more hit on 60 after the buffers drained carries the lost flag
    @(posedge clk); #(1000); disc_t[60] = 1; #(30_000) disc_t[60] = 0;
    repeat (3000) @(posedge clk);
    spi.read(7'd65, rd);
    chk("configuration upset corrected and counted", rd == 24'd1);
    spi.read(7'd5, rd);
    chk("channel 5 configuration intact", rd[23:16] == 8'(WIN) && rd[5:0] == 6'd5);
    chk("all expected events received", expq.size() == 0);
    chk("no link decode errors", ne[0] == 0 && ne[1] == 0);
    chk("overflow channel delivered fewer events than triggers", n_ovf_evt >= 4 && n_ovf_evt < 7);
    $display("mechanisms: sh=%0d tot=%0d tp=%0d timeout=%0d lost=%0d overflow_events=%0d link0=%0d link1=%0d",
             n_sh, n_tot, n_tp, n_tmo, n_lost, n_ovf_evt, nv[0], nv[1]);
    chk("S/H hits", n_sh > 0);
    chk("ToT hits", n_tot > 0);
    chk("test pulse hits", n_tp > 0);
    chk("ToT timeout", n_tmo > 0);
    chk("lost trigger flagged", n_lost > 0);
    chk("both links used", nv[0] > 0 && nv[1] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
