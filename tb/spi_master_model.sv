// spi_master_model: SPI master for simulation, mode 0, MSB first,
// 100 ns bit period (10 MHz). xfer() sends a command byte {write, addr}
// and 24 data bits and returns the 24 bits read back on miso.
`timescale 1ns/1ps
module spi_master_model (
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  initial begin sclk = 0; cs_n = 1; mosi = 0; end

  task automatic xfer(input bit wr, input logic [6:0] addr,
                      input logic [23:0] wdata, output logic [23:0] rdata);
    logic [31:0] frame;
    frame = {wr, addr, wdata};
    rdata = '0;
    cs_n = 0;
    #100;
    for (int i = 31; i >= 0; i--) begin
      mosi = frame[i];
      #50 sclk = 1;
      if (i < 24) rdata = {rdata[22:0], miso};
      #50 sclk = 0;
    end
    #100 cs_n = 1;
    #200;
  endtask

  task automatic write(input logic [6:0] addr, input logic [23:0] d);
    logic [23:0] unused;
    xfer(1'b1, addr, d, unused);
  endtask

  task automatic read(input logic [6:0] addr, output logic [23:0] d);
    xfer(1'b0, addr, 24'h0, d);
  endtask
endmodule
