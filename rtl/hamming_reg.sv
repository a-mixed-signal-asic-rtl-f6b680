// hamming_reg: SEU-protected configuration register.
//
// The register stores its DW data bits as a Hamming single-error-correcting
// code word (parity bits at the power-of-two positions 1, 2, 4, ... of a
// 1-based code word). Every cycle the stored word is decoded: the syndrome
// names the position of a single flipped bit, which is corrected in the
// output and written back into the flops (scrubbing), so that an upset is
// repaired before a second one can accumulate. 'corrected' pulses for one
// cycle when this happens. A write ('we') stores the newly encoded 'wdata'.
//
// The ASIC description says the digital logic is protected against single
// event upsets with Hamming encoding and error correction; the code length,
// the per-register granularity and continuous scrubbing are this design's.
// Reset loads RST_VAL. 'q' is combinational from the stored word.
module hamming_reg #(
  parameter int                DW      = 24,
  parameter logic [DW-1:0]     RST_VAL = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] q,
  output logic          corrected
);
  // Number of parity bits: smallest P with 2^P >= DW + P + 1.
  function automatic int calc_p(int dw);
    int p = 1;
    while ((1 << p) < dw + p + 1) p++;
    return p;
  endfunction
  localparam int P = calc_p(DW);
  localparam int N = DW + P;

  // Code word bit i (0-based) sits at Hamming position i+1.
  function automatic logic [N-1:0] encode(input logic [DW-1:0] d);
    logic [N-1:0] c;
    int k;
    c = '0;
    k = 0;
    for (int pos = 1; pos <= N; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        c[pos-1] = d[k];
        k++;
      end
    end
    for (int j = 0; j < P; j++) begin
      logic par;
      par = 1'b0;
      for (int pos = 1; pos <= N; pos++)
        if (((pos >> j) & 1) == 1 && pos != (1 << j)) par ^= c[pos-1];
      c[(1 << j) - 1] = par;
    end
    return c;
  endfunction

  function automatic logic [DW-1:0] extract(input logic [N-1:0] c);
    logic [DW-1:0] d;
    int k;
    d = '0;
    k = 0;
    for (int pos = 1; pos <= N; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        d[k] = c[pos-1];
        k++;
      end
    end
    return d;
  endfunction

  logic [N-1:0] code_q;
  logic [N-1:0] fixed;
  logic [P-1:0] syndrome;

  always_comb begin
    syndrome = '0;
    for (int pos = 1; pos <= N; pos++)
      if (code_q[pos-1]) syndrome ^= P'(pos);
    fixed = code_q;
    if (syndrome != '0 && int'(syndrome) <= N)
      fixed[syndrome-1] = ~code_q[syndrome-1];
  end

  assign q = extract(fixed);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_q    <= encode(RST_VAL);
      corrected <= 1'b0;
    end else begin
      corrected <= (syndrome != '0);
      if (we) code_q <= encode(wdata);
      else    code_q <= fixed;
    end
  end
endmodule
