// tiger_rate_tb: the chip at full size under its design hit rate.
//
// All 64 channels receive random hits at a mean rate of 60 kHz each
// (exponentially distributed spacing, at least 400 ns apart as the
// shaped pulses would merge below that), half of the channels in S/H mode
// with random amplitudes up to the full 10-bit range, half in ToT mode.
// The test runs 600 us of beam and checks that the hits reach the serial
// links as events, that a hit is missing only when the channel had all
// four buffers busy (and then the next event carries the 'lost' flag),
// that such losses stay below 0.5 % of the hits, that the links decode
// without error, and reports the achieved event rate and the link load.
// Conversions of large S/H amplitudes take up to 1023 cycles (6.4 us),
// so a burst of five hits within a few conversion times can still
// overflow a channel at this rate; the buffers make that rare.
`timescale 1ps/1ps
module tiger_rate_tb;
  import tiger_pkg::*;
  localparam int T = 6250;
  localparam int RUN_CYCLES = 96_000;       // 600 us
  localparam real MEAN_GAP = 2667.0;        // cycles: 1 / 60 kHz / 6.25 ns

  logic clk = 0, rst_n = 0;
  always #(T/2) clk = ~clk;

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
    #(longint'(RUN_CYCLES + 200_000) * T);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hits [N_CH];
  int got [N_CH];
  int lost_ch [N_CH];
  int n_lost = 0;
  bit running = 0;

  always @(posedge clk) begin
    for (int l = 0; l < N_LINKS; l++) if (stb[l]) begin
      event_t e;
      e = event_t'(word[l]);
      got[e.channel]++;
      if (e.lost) begin n_lost++; lost_ch[e.channel]++; end
    end
  end

  // Hit generator of one channel.
  task automatic source(int c);
    int gap;
    while (running) begin
      gap = int'(-MEAN_GAP * $ln(1.0 - real'($urandom_range(0, 999_999)) / 1.0e6));
      if (gap < 64) gap = 64;
      repeat (gap) @(posedge clk);
      if (!running) break;
      #($urandom_range(1, T - 1));
      amp[c] = $urandom_range(5, 1000);
      disc_t[c] = 1;
      hits[c]++;
      #(20_000) disc_e[c] = 1;
      #($urandom_range(20_000, 200_000));
      disc_e[c] = 0; disc_t[c] = 0;
    end
  endtask

  initial begin
    longint t0, t1;
    int total_hits, total_got;
    for (int c = 0; c < N_CH; c++) begin
      disc_t[c] = 0; disc_e[c] = 0; amp[c] = 0; hits[c] = 0; got[c] = 0; lost_ch[c] = 0;
    end
    #(10 * T) rst_n = 1;
    for (int c = 0; c < N_CH; c++) begin
      ch_cfg_t cfg;
      cfg = '0;
      cfg.enable = 1; cfg.sh_window = 8'd32;
      cfg.mode = (c % 2) ? MODE_TOT : MODE_SH;
      spi.write(7'(c), 24'(cfg));
    end
    spi.write(7'd64, 24'h000002);  // tx_enable, training off
    running = 1;
    t0 = $time;
    for (int c = 0; c < N_CH; c++)
      fork
        automatic int cc = c;
        source(cc);
      join_none
    repeat (RUN_CYCLES) @(posedge clk);
    running = 0;
    t1 = $time;
    repeat (5000) @(posedge clk);
    total_hits = 0; total_got = 0;
    for (int c = 0; c < N_CH; c++) begin
      total_hits += hits[c];
      total_got += got[c];
      chk($sformatf("channel %0d: %0d hits, %0d events, %0d flagged", c, hits[c], got[c], lost_ch[c]),
          got[c] <= hits[c] && (hits[c] - got[c] == 0 || lost_ch[c] > 0) && lost_ch[c] <= hits[c] - got[c]);
    end
    chk("losses below 0.5 %", real'(total_hits - total_got) < 0.005 * real'(total_hits));
    chk("no link errors", ne[0] == 0 && ne[1] == 0);
    chk("rate reached", real'(total_hits) / (real'(t1 - t0) * 1.0e-12) / 64.0 > 50.0e3);
    $display("hits=%0d events=%0d lost flags=%0d rate per channel=%0.1f kHz link load=%0.1f %%",
             total_hits, total_got, n_lost,
             real'(total_hits) / (real'(t1 - t0) * 1.0e-12) / 64.0 / 1.0e3,
             100.0 * real'(total_got) * 80.0 / (real'(t1 - t0) / real'(T)) / real'(N_LINKS * LINK_BPC));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
