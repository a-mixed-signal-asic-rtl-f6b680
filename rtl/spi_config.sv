// spi_config: SPI-like configuration port and SEU-protected register file.
//
// The chip is configured through a slow serial port (10 MHz nominal).
// Its pins are oversampled by the 160 MHz core clock through two-flop
// synchronisers, so the port needs no clock domain of its own: each SPI
// bit lasts about 16 core cycles.
//
// Frame (SPI mode 0, MSB first, framed by cs_n low): one command byte
// {write, addr[6:0]} followed by 24 data bits. Addresses 0..63 are the
// channel registers (ch_cfg_t), 64 the global register (glb_cfg_t) and 65
// a read-only status word holding the number of upsets corrected since
// reset. On a write the register is updated after the 32nd bit; a frame
// cut short writes nothing. On a read the register is shifted out on
// 'miso' from the bit after the command byte, changing after falling
// sclk edges.
//
// Every register is a hamming_reg: stored Hamming-encoded, corrected and
// scrubbed each cycle. Reset values: channels disabled with an S/H window
// of 32 cycles (200 ns, longer than the 160 ns E-shaper peaking time);
// links in training. The 10 MHz port and the channel / global registers
// with Hamming protection follow the ASIC description; the frame format,
// address map and reset values are this design's own choices.
module spi_config
  import tiger_pkg::*;
#(
  parameter int NCH = N_CH
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     sclk,
  input  logic     cs_n,
  input  logic     mosi,
  output logic     miso,
  output ch_cfg_t  ch_cfg [NCH],
  output glb_cfg_t gcfg
);
  localparam logic [CFG_W-1:0] CH_RST  = CFG_W'(32'h20_0000);  // sh_window = 32
  localparam logic [CFG_W-1:0] GLB_RST = CFG_W'(32'h00_0001);  // training

  logic [2:0] s_sclk, s_cs, s_mosi;
  logic       rise, fall, active;
  logic [5:0] nbits;
  logic [31:0] shin;
  logic [CFG_W-1:0] shout;
  logic [CFG_W-1:0] rdata;
  logic [6:0] addr;
  logic       wr_pulse;
  logic [CFG_W-1:0] wdata;
  logic [15:0] seu_cnt;

  logic [CFG_W-1:0] regs_q [NCH+1];
  logic             corr   [NCH+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_sclk <= '0;
      s_cs   <= '1;
      s_mosi <= '0;
    end else begin
      s_sclk <= {s_sclk[1:0], sclk};
      s_cs   <= {s_cs[1:0], cs_n};
      s_mosi <= {s_mosi[1:0], mosi};
    end
  end
  assign active = !s_cs[1];
  assign rise   = active && s_sclk[1] && !s_sclk[2];
  assign fall   = active && !s_sclk[1] && s_sclk[2];

  // Register read mux: channel, global or status.
  always_comb begin
    if (int'(addr) < NCH)              rdata = regs_q[addr];
    else if (int'(addr) == NCH)        rdata = regs_q[NCH];
    else if (int'(addr) == NCH + 1)    rdata = CFG_W'(seu_cnt);
    else                               rdata = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbits    <= '0;
      shin     <= '0;
      shout    <= '0;
      addr     <= '0;
      wr_pulse <= 1'b0;
      wdata    <= '0;
    end else begin
      wr_pulse <= 1'b0;
      if (!active) begin
        nbits <= '0;
        shout <= '0;
      end else begin
        if (rise) begin
          shin  <= {shin[30:0], s_mosi[1]};
          nbits <= nbits + 1'b1;
          if (nbits == 6'd7) addr <= {shin[5:0], s_mosi[1]};
          if (nbits == 6'd31 && shin[30]) begin
            wr_pulse <= 1'b1;
            wdata    <= {shin[22:0], s_mosi[1]};
          end
        end
        // Load the read data once the command byte is complete; shift on
        // the falling edges that follow.
        if (nbits == 6'd8 && fall) shout <= rdata;
        else if (fall && nbits > 6'd8) shout <= {shout[CFG_W-2:0], 1'b0};
      end
    end
  end
  // The first read bit must be on the line before the 9th rising edge:
  // the falling edge after the 8th bit loads it.
  assign miso = shout[CFG_W-1];

  for (genvar r = 0; r <= NCH; r++) begin : g_reg
    hamming_reg #(.DW(CFG_W), .RST_VAL(r == NCH ? GLB_RST : CH_RST)) u_reg (
      .clk, .rst_n,
      .we       (wr_pulse && int'(addr) == r),
      .wdata    (wdata),
      .q        (regs_q[r]),
      .corrected(corr[r])
    );
  end

  // Count corrected upsets (saturating).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seu_cnt <= '0;
    else begin
      int n;
      n = 0;
      for (int r = 0; r <= NCH; r++) n += int'(corr[r]);
      if (n != 0 && seu_cnt != 16'hFFFF) seu_cnt <= seu_cnt + 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < NCH; c++) ch_cfg[c] = ch_cfg_t'(regs_q[c]);
    gcfg = glb_cfg_t'(regs_q[NCH]);
  end
endmodule
