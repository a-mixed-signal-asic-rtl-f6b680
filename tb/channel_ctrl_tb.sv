// channel_ctrl_tb: self-checking test of one channel controller with the
// behavioural TAC / S-H model on both branches.
//
// Hits are placed at random picosecond offsets within a 6.25 ns clock
// period. The expected coarse time is the tb's own cycle count at the
// clock edge after the trigger; the expected fine value is
// floor(128 * (edge time - trigger time) / 6250 ps), checked to +-1. The
// test covers S/H mode (window length and held amplitude), ToT mode
// (trailing edge of the E discriminator), the test pulse as TDC trigger,
// the ToT timeout, and buffer overflow (four hits buffered while the
// output is stalled, the fifth lost and flagged on the next event).
`timescale 1ps/1ps
module channel_ctrl_tb;
  import tiger_pkg::*;
  localparam int T = 6250;

  logic clk = 1'b0, rst_n = 1'b0;
  always #(T/2) clk = ~clk;

  logic [15:0] cyc = 16'd0;
  always @(posedge clk) cyc <= cyc + 1'b1;

  ch_cfg_t cfg;
  logic disc_t = 0, disc_e = 0, tp = 0;
  logic trig_t, trig_e, sh_sample, e_src_sh, conv_en, tac_rst, comp_t, comp_e, tp_fe;
  logic [1:0] arm_sel, conv_sel;
  logic evt_valid, evt_ready;
  event_t evt;
  int amp = 0;

  channel_ctrl #(.TOT_TIMEOUT(60)) dut (
    .clk, .rst_n, .ch_id(6'd37), .cfg, .coarse(cyc),
    .disc_t, .disc_e, .tp,
    .trig_t, .trig_e, .arm_sel, .sh_sample, .e_src_sh, .conv_en, .conv_sel,
    .tac_rst, .comp_out_t(comp_t), .comp_out_e(comp_e), .tp_fe,
    .evt_valid, .evt, .evt_ready
  );
  tac_sh_model m_t (.clk, .trig(trig_t), .arm_sel, .sh_sample(1'b0), .e_src_sh(1'b0),
                    .conv_en, .conv_sel, .tac_rst, .amplitude(0), .comp_out(comp_t));
  tac_sh_model m_e (.clk, .trig(trig_e), .arm_sel, .sh_sample, .e_src_sh,
                    .conv_en, .conv_sel, .tac_rst, .amplitude(amp), .comp_out(comp_e));

  int checks = 0, failures = 0;
  typedef struct {
    int tcoarse, tfine, ecoarse, efine, mode, lost, timeout;
    logic chk_efine_exact;
  } exp_t;
  exp_t q[$];

  function automatic int fine_of(realtime t);
    longint tn;
    tn = ((longint'(t) - T/2) / T + 1) * T + T/2;  // next rising edge
    return int'($floor(128.0 * real'(tn - longint'(t)) / real'(T)));
  endfunction

  task automatic check(string what, int got, int exp, int tol = 0);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Event checker
  always @(posedge clk) begin
    if (rst_n && evt_valid && evt_ready) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected event");
      end else begin
        e = q.pop_front();
        check("channel", int'(evt.channel), 37);
        check("tcoarse", int'(evt.tcoarse), e.tcoarse);
        check("tfine", int'(evt.tfine), e.tfine, 1);
        check("ecoarse", int'(evt.ecoarse), e.ecoarse);
        check("efine", int'(evt.efine), e.efine, e.chk_efine_exact ? 0 : 1);
        check("mode", int'(evt.mode), e.mode);
        check("lost", int'(evt.lost), e.lost);
        check("timeout", int'(evt.timeout), e.timeout);
      end
    end
  end

  // Fire a T trigger at 'off' ps after a clock edge; returns expectations.
  task automatic drain();
    while (q.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic hit_sh(int off, int a, int lost = 0, bit use_tp = 0, bit wait_out = 1);
    exp_t e;
    @(posedge clk);
    #(off);
    amp = a;
    if (use_tp) tp = 1; else disc_t = 1;
    e.tcoarse = (int'(cyc) + 1) & 16'hFFFF;
    e.tfine   = fine_of($realtime);
    e.ecoarse = (e.tcoarse + int'(cfg.sh_window) + 1) & 16'hFFFF;
    e.efine   = (a < 1) ? 1 : a;
    e.mode = 0; e.lost = lost; e.timeout = 0; e.chk_efine_exact = 1;
    q.push_back(e);
    #(40_000);
    disc_t = 0; tp = 0;
    repeat (int'(cfg.sh_window) + 4) @(posedge clk);
    if (wait_out) drain();
  endtask

  task automatic hit_tot(int off, int e_rise_ns, int e_fall_off, int len_cyc, bit use_tp = 0);
    exp_t e;
    @(posedge clk);
    #(off);
    if (use_tp) tp = 1; else disc_t = 1;
    e.tcoarse = (int'(cyc) + 1) & 16'hFFFF;
    e.tfine   = fine_of($realtime);
    #(e_rise_ns * 1000);
    disc_e = 1;
    repeat (len_cyc) @(posedge clk);
    #(e_fall_off);
    disc_e = 0; disc_t = 0; tp = 0;
    e.ecoarse = (int'(cyc) + 1) & 16'hFFFF;
    e.efine   = fine_of($realtime);
    e.mode = 1; e.lost = 0; e.timeout = 0; e.chk_efine_exact = 0;
    q.push_back(e);
    repeat (4) @(posedge clk);
    drain();
  endtask

  initial begin
    #(200000 * T);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_sh = 0, n_tot = 0, n_tp = 0, n_tmo = 0, n_lost = 0;

  initial begin
    cfg = '0;
    cfg.enable = 1; cfg.mode = MODE_SH; cfg.sh_window = 8'd20;
    cfg.vth_t1 = 6'd10; cfg.vth_t2 = 6'd12;
    evt_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // S/H mode, random phases and amplitudes
    for (int i = 0; i < 12; i++) begin
      hit_sh(1 + $urandom_range(0, T - 2), $urandom_range(5, 1000));
      n_sh++;
    end
    // ToT mode
    cfg.mode = MODE_TOT;
    for (int i = 0; i < 8; i++) begin
      hit_tot(1 + $urandom_range(0, T - 2), 20, 1 + $urandom_range(0, T - 2),
              $urandom_range(5, 40));
      n_tot++;
    end
    // Test pulse drives the TDCs directly
    cfg.tp_tdc = 1; cfg.tp_fe = 1;
    for (int i = 0; i < 3; i++) begin
      hit_tot(1 + $urandom_range(0, T - 2), 0, 1 + $urandom_range(0, T - 2), 10, 1);
      n_tp++;
    end
    check("tp_fe follows tp", int'(tp_fe), 0);
    cfg.tp_tdc = 0;
    // ToT timeout: E discriminator never fires
    begin
      exp_t e;
      @(posedge clk); #(1234);
      disc_t = 1;
      e.tcoarse = (int'(cyc) + 1) & 16'hFFFF;
      e.tfine = fine_of($realtime);
      // capture starts 2 cycles after the edge, timer runs 60 cycles
      e.ecoarse = (e.tcoarse + 2 + 60) & 16'hFFFF;
      e.efine = 1023; e.mode = 1; e.lost = 0; e.timeout = 1; e.chk_efine_exact = 1;
      q.push_back(e);
      #(30_000); disc_t = 0;
      repeat (120) @(posedge clk);
      drain();
      n_tmo++;
    end
    // Overflow: output stalled, 4 buffers fill, 5th trigger is lost
    cfg.mode = MODE_SH; cfg.sh_window = 8'd3;
    evt_ready <= 0;
    for (int i = 0; i < 4; i++) hit_sh(1 + $urandom_range(0, T - 2), 100 + i, 0, 0, 0);
    @(posedge clk); #(777); disc_t = 1; #(40_000); disc_t = 0;
    repeat (1200) @(posedge clk);
    check("stalled channel holds event", int'(evt_valid), 1);
    evt_ready <= 1;
    repeat (20) @(posedge clk);
    hit_sh(1 + $urandom_range(0, T - 2), 55, 1);
    n_lost++;
    repeat (1300) @(posedge clk);
    check("all events seen", q.size(), 0);
    $display("mechanisms: sh=%0d tot=%0d tp=%0d timeout=%0d lost=%0d",
             n_sh, n_tot, n_tp, n_tmo, n_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
