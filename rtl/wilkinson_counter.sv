// wilkinson_counter: digital part of one Wilkinson ADC.
//
// In the analog TDC a TAC capacitor is discharged between the trigger and
// the next clock edge, its voltage is moved onto a 4x larger capacitor and
// then recharged with a 32x smaller current until a latched comparator
// fires. The recharge time is therefore 128 times the measured interval,
// and counting it in master-clock cycles gives a fine value with a
// 6.25 ns / 128 ~ 50 ps bin. The same ADC digitises the held S/H voltage.
//
// This block is that counter. A one-cycle 'start' (the beginning of the
// conversion phase) clears the count; while 'busy' the count increments
// every cycle until 'comp_out', which is latched and therefore synchronous
// to clk, is seen high. 'done' then pulses for one cycle with 'value'
// holding the number of cycles from start to comparator. If the comparator
// does not fire the count saturates at 2^W-1 and finishes (own choice).
module wilkinson_counter #(
  parameter int W = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         comp_out,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] value
);
  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      value <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        if (comp_out || cnt == '1) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          value <= cnt;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
