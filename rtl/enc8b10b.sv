// enc8b10b: 8B/10B line encoder with running disparity.
//
// Implements the standard Widmer-Franaszek 8B/10B code: the low five bits
// (EDCBA) map to a 6-bit sub-block 'abcdei' and the high three bits (HGF)
// to a 4-bit sub-block 'fghj'. Each sub-block is chosen from the running
// disparity (RD) left by the previous one, so that the line stays
// DC-balanced and never runs more than five equal bits. Control symbols
// K28.y (data = {y, 5'd28}, k = 1) are supported; K28.5 is the comma used
// by the links for idle, training and word alignment. Other K codes are
// not used by this design and are encoded as K28.y with the same y.
//
// The output is registered: when 'ce' is high the symbol for (data, k) is
// registered on 'code' one cycle later and RD is updated. code[9] is bit
// 'a', the first bit to transmit. RD resets to negative. The ASIC
// description names the 8B/10B encoding of its links; the rest is the
// standard code.
module enc8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ce,
  input  logic [7:0] data,
  input  logic       k,
  output logic [9:0] code,
  output logic       rd_pos   // running disparity after 'code' (1 = positive)
);
  // 5b/6b table for RD negative, written 'abcdei'.
  function automatic logic [5:0] six_rdneg(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // 3b/4b table for RD negative, written 'fghj' (primary D.x.7).
  function automatic logic [3:0] four_rdneg(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  // Ones minus zeros of a sub-block is zero unless the ones count differs
  // from half the width.
  function automatic logic unbal6(input logic [5:0] c);
    return $countones(c) != 3;
  endfunction
  function automatic logic unbal4(input logic [3:0] c);
    return $countones(c) != 2;
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd_mid, rd_next;
  logic [9:0] sym;

  assign x = data[4:0];
  assign y = data[7:5];

  always_comb begin
    if (k) begin
      // K28.y: RD- form is 001111 followed by the RD+ 'fghj' entry (A7 for
      // y = 7); the RD+ form is its complement.
      c6 = 6'b001111;
      if (y == 3'd7)      c4 = 4'b1000;
      else if (y == 3'd3) c4 = 4'b0011;
      else if (unbal4(four_rdneg(y))) c4 = ~four_rdneg(y);
      else                c4 = four_rdneg(y);
      sym     = rd_pos ? ~{c6, c4} : {c6, c4};
      rd_mid  = rd_pos;
      rd_next = rd_pos ^ ($countones(sym) != 5);
    end else begin
      c6 = six_rdneg(x);
      if (rd_pos) begin
        if (x == 5'd7)       c6 = 6'b000111;
        else if (unbal6(c6)) c6 = ~c6;
      end
      rd_mid = rd_pos ^ unbal6(c6);
      if (y == 3'd7 && ((!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                        ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14))))
        c4 = 4'b0111;  // alternate D.x.A7 avoids a run of five
      else
        c4 = four_rdneg(y);
      if (rd_mid) begin
        if (y == 3'd3)       c4 = 4'b0011;
        else if (unbal4(c4)) c4 = ~c4;
      end
      sym     = {c6, c4};
      rd_next = rd_mid ^ unbal4(c4);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code   <= 10'b0;
      rd_pos <= 1'b0;
    end else if (ce) begin
      code   <= sym;
      rd_pos <= rd_next;
    end
  end
endmodule
