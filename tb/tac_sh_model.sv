// tac_sh_model: behavioural model of one branch's analog buffers and
// Wilkinson comparator, for simulation only.
//
// Four TACs (and, for the E-branch, four S/H cells) share one Wilkinson
// ramp and latched comparator. A rising 'trig' starts discharging TAC
// 'arm_sel'; the discharge stops at the next rising clock edge, so the TAC
// holds t_tac, the time from trigger to that edge. While 'sh_sample' is
// high the S/H cell 'arm_sel' tracks 'amplitude' (an integer in ADC
// counts standing in for the E-shaper peak). During 'conv_en' the buffer
// 'conv_sel' is converted: the comparator output, latched on the clock,
// goes high once the number of clock edges since conversion start reaches
// the target, floor(128 * t_tac / T_CLK) for a TAC (4x capacitor, 32x
// smaller recharge current) or the held amplitude for the S/H cell when
// 'e_src_sh' is set. 'tac_rst' clears the converted buffer.
`timescale 1ps/1ps
module tac_sh_model #(
  parameter int T_CLK_PS = 6250
) (
  input  logic       clk,
  input  logic       trig,
  input  logic [1:0] arm_sel,
  input  logic       sh_sample,
  input  logic       e_src_sh,
  input  logic       conv_en,
  input  logic [1:0] conv_sel,
  input  logic       tac_rst,
  input  int         amplitude,
  output logic       comp_out
);
  realtime t0;
  logic    pend = 1'b0;
  logic [1:0] pend_slot;
  int      tac_cnt [4];
  int      sh_val [4];
  int      n = 0;

  initial begin
    comp_out = 1'b0;
    for (int i = 0; i < 4; i++) begin
      tac_cnt[i] = 1023;
      sh_val[i]  = 0;
    end
  end

  always @(posedge trig) begin
    if (!pend) begin
      pend      = 1'b1;
      pend_slot = arm_sel;
      t0        = $realtime;
    end
  end

  always_ff @(posedge clk) begin
    int target;
    if (pend) begin
      tac_cnt[pend_slot] = int'($floor(128.0 * ($realtime - t0) / real'(T_CLK_PS)));
      pend = 1'b0;
    end
    if (sh_sample) sh_val[arm_sel] = amplitude;
    target = e_src_sh ? sh_val[conv_sel] : tac_cnt[conv_sel];
    if (conv_en) begin
      comp_out <= (n + 1 >= target);
      n = n + 1;
    end else begin
      comp_out <= 1'b0;
      n = 0;
    end
    if (tac_rst) begin
      tac_cnt[conv_sel] = 1023;
      sh_val[conv_sel]  = 1023;
    end
  end
endmodule
