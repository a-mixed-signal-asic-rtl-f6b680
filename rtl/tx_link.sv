// tx_link: one serial output link.
//
// Events are pushed into the link as 64-bit words and leave as eight
// 8B/10B data symbols, most significant byte first. Whenever no event is
// waiting, and continuously while 'training' is set, the link sends the
// K28.5 comma: during training the receiver uses the stream of commas to
// find the symbol boundary, and afterwards a comma marks an idle symbol
// slot. A data symbol therefore always starts or continues an 8-byte
// event, and a receiver that counts eight data symbols after any comma
// recovers the events without a framing symbol.
//
// BPC bits are sent per clock cycle (default 2, for a double-data-rate
// output cell: 320 Mb/s per link at 160 MHz, 10/BPC cycles per symbol).
// Bit 'a' of each symbol goes first; within one cycle tx[BPC-1] is the
// earlier bit. The symbol for the next slot is chosen in the first cycle
// of the current one and encoded one cycle later; an event is taken (evt_ready
// high for that cycle, valid or not) only at the start of a frame, so training and
// enable changes never cut an event. 'rd_pos' of the encoder is not
// needed here and is left open. The two links, 8B/10B and TX
// training follow the ASIC description; the framing, bit order and
// line rate are this design's own choices.
module tx_link
  import tiger_pkg::*;
#(
  parameter int BPC = LINK_BPC  // 1 or 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             training,
  input  logic             tx_enable,
  input  logic [EVT_W-1:0] evt,
  input  logic             evt_valid,
  output logic             evt_ready,
  output logic [BPC-1:0]   tx
);
  localparam logic [3:0] LAST = 4'(10 / BPC - 1);

  logic [3:0]       bit_cnt;
  logic [2:0]       byte_idx;
  logic [EVT_W-1:0] frame_q;
  logic [7:0]       sym_data;
  logic             sym_k;
  logic             enc_ce;
  logic [9:0]       code, shreg;

  enc8b10b u_enc (
    .clk, .rst_n, .ce(enc_ce), .data(sym_data), .k(sym_k), .code, .rd_pos()
  );

  // Symbol selection at bit 0 of the symbol on the line.
  always_comb begin
    enc_ce    = (bit_cnt == 4'd0);
    evt_ready = 1'b0;
    sym_k     = 1'b1;
    sym_data  = K28_5;
    if (byte_idx != 3'd0) begin
      sym_k    = 1'b0;
      sym_data = frame_q[EVT_W-1 - 8*byte_idx -: 8];
    end else if (!training && tx_enable) begin
      // Ready does not depend on valid, so links can be offered the same
      // event combinationally without a loop.
      evt_ready = enc_ce;
      if (evt_valid) begin
        sym_k    = 1'b0;
        sym_data = evt[EVT_W-1 -: 8];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt  <= '0;
      byte_idx <= '0;
      frame_q  <= '0;
      shreg    <= 10'b1100000101;  // K28.5 in RD+ form: leaves RD negative
    end else begin
      bit_cnt <= (bit_cnt == LAST) ? 4'd0 : bit_cnt + 1'b1;
      if (enc_ce) begin
        if (byte_idx != 3'd0) byte_idx <= byte_idx + 1'b1;
        else if (evt_ready && evt_valid) begin
          frame_q  <= evt;
          byte_idx <= 3'd1;
        end
      end
      if (bit_cnt == LAST) shreg <= code;
      else                 shreg <= shreg << BPC;
    end
  end

  assign tx = shreg[9 -: BPC];

`ifndef SYNTHESIS
  initial assert (BPC == 1 || BPC == 2) else $error("tx_link: BPC must be 1 or 2");
`endif
endmodule
