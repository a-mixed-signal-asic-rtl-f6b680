// link_rx_model: receiver for one serial link, for simulation only.
//
// Samples 'tx' on every rising clock edge (BPC bits per cycle, tx[BPC-1]
// first), finds the
// symbol boundary on the first K28.5 comma, then decodes each 10-bit
// symbol with the reference 8B/10B decoder while tracking the running
// disparity. Commas are counted; data symbols are collected eight at a
// time, most significant byte first, into 64-bit event words that appear
// on 'evt_word' with a one-cycle 'evt_stb'. Symbols that do not decode,
// or a comma inside an event, are counted in 'n_err'.
module link_rx_model #(
  parameter int BPC = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [BPC-1:0] tx,
  output logic        evt_stb,
  output logic [63:0] evt_word,
  output int          n_comma,
  output int          n_err,
  output int          n_evt
);
  import ref8b10b_pkg::*;
  logic [9:0]  sh;
  logic        aligned;
  int          bitpos;
  logic        rd;
  int          nbytes;
  logic [63:0] acc;

  task automatic take_bit(logic b);
    logic [7:0] d;
    logic k;
    sh = {sh[8:0], b};
    if (!aligned) begin
      if (sh == 10'b0011111010 || sh == 10'b1100000101) begin
        aligned = 1; bitpos = 0;
        rd = (sh == 10'b0011111010);
        n_comma++;
      end
    end else begin
      bitpos++;
      if (bitpos == 10) begin
        bitpos = 0;
        if (!dec(sh, rd, d, k)) begin
          n_err++;
          // a disparity error: continue with the other disparity
          if (dec(sh, ~rd, d, k)) begin
            logic [10:0] e2;
            e2 = enc(d, k, ~rd);
            rd = e2[10];
          end
        end else begin
          logic [10:0] e;
          e = enc(d, k, rd);
          rd = e[10];
          if (k) begin
            n_comma++;
            if (nbytes != 0) begin n_err++; nbytes = 0; end
          end else begin
            acc = {acc[55:0], d};
            nbytes++;
            if (nbytes == 8) begin
              nbytes = 0;
              evt_word <= acc;
              evt_stb  <= 1;
              n_evt++;
            end
          end
        end
      end
    end
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh = '0; aligned = 0; bitpos = 0; rd = 0; nbytes = 0; acc = '0;
      evt_stb <= 0; evt_word <= '0; n_comma = 0; n_err = 0; n_evt = 0;
    end else begin
      evt_stb <= 0;
      for (int i = BPC - 1; i >= 0; i--) take_bit(tx[i]);
    end
  end
endmodule
