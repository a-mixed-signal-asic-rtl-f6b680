// tiger_top: digital back-end of the TIGER 64-channel GEM readout ASIC.
//
// Each channel's analog front-end (charge amplifier, a fast T shaper and a
// slow E shaper, two discriminators with 6-bit threshold DACs) delivers
// two discriminator outputs. The back-end time-stamps and digitises each
// hit with per-channel analog TACs, sample-and-hold cells and Wilkinson
// ADCs driven by 'channel_ctrl', using the common 16-bit coarse counter,
// and pushes every hit through 'global_ctrl' onto two 8B/10B serial links.
// 'spi_config' holds the SEU-protected configuration.
//
// The analog parts are outside this module: for every channel the
// discriminator outputs come in as ports, and the controls of the TAC /
// S-H buffers and ADC comparators go out and come back as ports, as do the
// threshold DAC codes, the test-pulse gating and amplitude code. 'tp' is
// the test-pulse input. All digital logic runs on the 160 MHz master
// clock 'clk'; the SPI pins and the discriminators are asynchronous and
// synchronised inside. Port timing is described in the sub-modules.
module tiger_top
  import tiger_pkg::*;
#(
  parameter int NCH         = N_CH,
  parameter int FIFO_DEPTH  = 16,
  parameter int TOT_TIMEOUT = 1023
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration port
  input  logic             sclk,
  input  logic             cs_n,
  input  logic             mosi,
  output logic             miso,
  // test pulse
  input  logic             tp,
  output logic             tp_fe      [NCH],
  output logic [5:0]       tp_amp,
  // front-end discriminators and threshold DACs
  input  logic             disc_t     [NCH],
  input  logic             disc_e     [NCH],
  output logic [VTH_W-1:0] vth_t1     [NCH],
  output logic [VTH_W-1:0] vth_t2     [NCH],
  output logic [1:0]       dac_range,
  // analog TAC / S-H / Wilkinson ADC interface, per channel
  output logic             trig_t     [NCH],
  output logic             trig_e     [NCH],
  output logic [TAC_W-1:0] arm_sel    [NCH],
  output logic             sh_sample  [NCH],
  output logic             e_src_sh   [NCH],
  output logic             conv_en    [NCH],
  output logic [TAC_W-1:0] conv_sel   [NCH],
  output logic             tac_rst    [NCH],
  input  logic             comp_out_t [NCH],
  input  logic             comp_out_e [NCH],
  // serial data links (to the LVDS drivers)
  output logic [LINK_BPC-1:0] tx      [N_LINKS]  // 2 bits per clock, [1] first
);
  logic [COARSE_W-1:0] coarse;
  ch_cfg_t             ch_cfg   [NCH];
  glb_cfg_t            gcfg;
  event_t              ch_evt   [NCH];
  logic                ch_valid [NCH];
  logic                ch_ready [NCH];
  logic                fifo_full;

  coarse_counter #(.W(COARSE_W)) u_coarse (.clk, .rst_n, .count(coarse));

  spi_config #(.NCH(NCH)) u_cfg (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .ch_cfg, .gcfg
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_ctrl #(.TOT_TIMEOUT(TOT_TIMEOUT)) u_ch (
      .clk, .rst_n,
      .ch_id     (CH_W'(c)),
      .cfg       (ch_cfg[c]),
      .coarse    (coarse),
      .disc_t    (disc_t[c]),
      .disc_e    (disc_e[c]),
      .tp        (tp),
      .trig_t    (trig_t[c]),
      .trig_e    (trig_e[c]),
      .arm_sel   (arm_sel[c]),
      .sh_sample (sh_sample[c]),
      .e_src_sh  (e_src_sh[c]),
      .conv_en   (conv_en[c]),
      .conv_sel  (conv_sel[c]),
      .tac_rst   (tac_rst[c]),
      .comp_out_t(comp_out_t[c]),
      .comp_out_e(comp_out_e[c]),
      .tp_fe     (tp_fe[c]),
      .evt_valid (ch_valid[c]),
      .evt       (ch_evt[c]),
      .evt_ready (ch_ready[c])
    );
    assign vth_t1[c] = ch_cfg[c].vth_t1;
    assign vth_t2[c] = ch_cfg[c].vth_t2;
  end

  assign tp_amp    = gcfg.tp_amp;
  assign dac_range = gcfg.dac_range;

  global_ctrl #(.NCH(NCH), .NLINK(N_LINKS), .FIFO_DEPTH(FIFO_DEPTH)) u_glb (
    .clk, .rst_n, .gcfg, .ch_evt, .ch_valid, .ch_ready, .tx, .fifo_full
  );
endmodule
