// ref8b10b_pkg: reference 8B/10B encoder and decoder for testbenches.
//
// Written from the published code tables independently of the RTL encoder
// and used to check it and to decode the serial links. enc() returns the
// 10-bit symbol 'abcdeifghj' for a byte (or K28.y) and a running
// disparity (0 = negative); dec() searches all byte / K combinations for
// a symbol and reports whether it is a valid code word for that RD.
package ref8b10b_pkg;
  // 5b/6b, RD- column, index = EDCBA
  localparam logic [5:0] T6 [32] = '{
    6'b100111, 6'b011101, 6'b101101, 6'b110001, 6'b110101, 6'b101001, 6'b011001, 6'b111000,
    6'b111001, 6'b100101, 6'b010101, 6'b110100, 6'b001101, 6'b101100, 6'b011100, 6'b010111,
    6'b011011, 6'b100011, 6'b010011, 6'b110010, 6'b001011, 6'b101010, 6'b011010, 6'b111010,
    6'b110011, 6'b100110, 6'b010110, 6'b110110, 6'b001110, 6'b101110, 6'b011110, 6'b101011};
  // 3b/4b, RD- column, index = HGF (primary x.7)
  localparam logic [3:0] T4 [8] = '{4'b1011, 4'b1001, 4'b0101, 4'b1100,
                                    4'b1101, 4'b1010, 4'b0110, 4'b1110};

  function automatic int disp(logic [9:0] c, int w);
    int ones = 0;
    for (int i = 0; i < w; i++) ones += c[i];
    return 2 * ones - w;
  endfunction

  // Returns {rd_next, code}.
  function automatic logic [10:0] enc(logic [7:0] d, logic k, logic rd);
    logic [5:0] s; logic [3:0] f; logic r;
    int x, y;
    x = d[4:0]; y = d[7:5];
    if (k) begin
      // K28.y in RD- form; complement for RD+
      s = 6'b001111;
      case (y)
        0: f = 4'b0100; 1: f = 4'b1001; 2: f = 4'b0101; 3: f = 4'b0011;
        4: f = 4'b0010; 5: f = 4'b1010; 6: f = 4'b0110; default: f = 4'b1000;
      endcase
      if (rd) begin s = ~s; f = ~f; end
      return {rd ^ (disp({s, f}, 10) != 0), s, f};
    end
    s = T6[x];
    if (rd && x == 7) s = 6'b000111;
    else if (rd && disp({4'b0, s}, 6) != 0) s = ~s;
    r = rd ^ (disp({4'b0, s}, 6) != 0);
    f = T4[y];
    if (y == 7 && ((!r && (x == 17 || x == 18 || x == 20)) || (r && (x == 11 || x == 13 || x == 14))))
      f = 4'b0111;
    if (r && y == 3) f = 4'b0011;
    else if (r && disp({6'b0, f}, 4) != 0) f = ~f;
    return {r ^ (disp({6'b0, f}, 4) != 0), s, f};
  endfunction

  // Decode: returns 1 and the byte / k flag if 'c' is a valid symbol.
  function automatic bit dec(logic [9:0] c, logic rd, output logic [7:0] d, output logic k);
    logic [10:0] e;
    for (int kk = 0; kk < 2; kk++) begin
      for (int v = 0; v < 256; v++) begin
        if (kk == 1 && v[4:0] != 5'd28) continue;
        e = enc(8'(v), kk[0], rd);
        if (e[9:0] == c) begin
          d = 8'(v); k = kk[0];
          return 1'b1;
        end
      end
    end
    d = 8'h00; k = 1'b0;
    return 1'b0;
  endfunction
endpackage
