// channel_ctrl: digital controller of one TIGER channel.
//
// A channel has two branches. The T-branch discriminator (fast shaper)
// gives the time of arrival; the E-branch gives the charge, either as the
// voltage held by a sample-and-hold (S/H mode) or as the time the E-branch
// discriminator goes low again (ToT mode). Each branch owns four analog
// buffers (TACs, plus four S/H cells on the E side) and one Wilkinson ADC,
// so up to four hits can wait for conversion: the buffers de-randomise the
// hit rate against the long conversion time.
//
// Operation, per hit (all buffers are used in order 0,1,2,3,0,...):
//  * capture: while buffer 'arm_sel' is free the T trigger is armed. The
//    trigger source is the T discriminator or, with cfg.tp_tdc, the test
//    pulse. Its rising edge discharges the armed T TAC until the next clock
//    edge (analog); the controller sees it through a two-flop synchroniser
//    and stores the coarse time of that clock edge (tcoarse).
//      S/H mode: 'sh_sample' is held high for cfg.sh_window cycles (at
//      least one), then the end time is stored as ecoarse.
//      ToT mode: once the E discriminator (or test pulse) has gone high,
//      the E trigger is armed on its falling edge, which fires the E TAC;
//      its coarse time is stored as ecoarse. If the end is not seen within
//      TOT_TIMEOUT cycles the hit is closed with the 'timeout' flag.
//  * conversion: 'conv_en' with 'conv_sel' connects one buffer of each
//    branch to its ADC; two wilkinson_counter blocks count until each
//    comparator fires, giving tfine and efine. A one-cycle 'tac_rst' then
//    resets that buffer.
//  * output: the finished hit is offered as an event_t with a valid/ready
//    handshake (data-push); on acceptance the buffer is free again.
// A trigger edge while no buffer is free is lost and flagged on the next
// event. Fine values count the 128x stretched interval between a trigger
// and the following clock edge, so a hit time is tcoarse*T - tfine*T/128.
//
// The four buffers, the trigger sources, the two modes, the user S/H
// window and the shared Wilkinson ADC follow the ASIC description. The
// in-order buffer policy, synchroniser, flags, timeout and handshake are
// this design's own choices.
module channel_ctrl
  import tiger_pkg::*;
#(
  parameter int TOT_TIMEOUT = 1023
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CH_W-1:0]     ch_id,
  input  ch_cfg_t             cfg,
  input  logic [COARSE_W-1:0] coarse,
  // discriminators and test pulse (asynchronous)
  input  logic                disc_t,
  input  logic                disc_e,
  input  logic                tp,
  // analog TAC / S-H / ADC interface
  output logic                trig_t,     // gated trigger to the armed T TAC
  output logic                trig_e,     // gated trigger to the armed E TAC (ToT)
  output logic [TAC_W-1:0]    arm_sel,    // buffer taking the next hit
  output logic                sh_sample,  // S/H sampling window
  output logic                e_src_sh,   // E ADC converts the S/H cell
  output logic                conv_en,    // conversion phase
  output logic [TAC_W-1:0]    conv_sel,   // buffer being converted
  output logic                tac_rst,    // reset pulse for buffer conv_sel
  input  logic                comp_out_t, // latched comparators (clocked)
  input  logic                comp_out_e,
  output logic                tp_fe,      // test pulse to the front-end
  // event output
  output logic                evt_valid,
  output event_t              evt,
  input  logic                evt_ready
);
  typedef enum logic [1:0] {S_FREE, S_READY, S_CONV, S_DONE} slot_e;
  typedef enum logic [1:0] {C_IDLE, C_SH, C_TOT_HI, C_TOT_LO} cap_e;

  slot_e               slot_st [N_TAC];
  logic [COARSE_W-1:0] s_tcoarse [N_TAC];
  logic [COARSE_W-1:0] s_ecoarse [N_TAC];
  logic [FINE_W-1:0]   s_tfine [N_TAC];
  logic [FINE_W-1:0]   s_efine [N_TAC];
  logic                s_mode [N_TAC];
  logic                s_lost [N_TAC];
  logic                s_tmo [N_TAC];

  cap_e             cap_st;
  logic [TAC_W-1:0] wptr, cptr, rptr;
  logic             armed_t, armed_e;
  logic [9:0]       timer;
  logic             lost_pending;

  logic src_t, src_e;
  logic [2:0] sync_trig_t, sync_trig_e, sync_src_t, sync_src_e;
  logic trig_t_rise, trig_e_rise, src_t_rise;

  // ---------------- trigger gating (combinational, asynchronous path)
  assign src_t  = cfg.tp_tdc ? tp : disc_t;
  assign src_e  = cfg.tp_tdc ? tp : disc_e;
  assign trig_t = armed_t & src_t;
  assign trig_e = armed_e & ~src_e;
  assign tp_fe  = cfg.enable & cfg.tp_fe & tp;

  // ---------------- synchronisers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_trig_t <= '0;
      sync_trig_e <= '0;
      sync_src_t  <= '0;
      sync_src_e  <= '0;
    end else begin
      sync_trig_t <= {sync_trig_t[1:0], trig_t};
      sync_trig_e <= {sync_trig_e[1:0], trig_e};
      sync_src_t  <= {sync_src_t[1:0], src_t};
      sync_src_e  <= {sync_src_e[1:0], src_e};
    end
  end
  assign trig_t_rise = sync_trig_t[1] & ~sync_trig_t[2];
  assign trig_e_rise = sync_trig_e[1] & ~sync_trig_e[2];
  assign src_t_rise  = sync_src_t[1] & ~sync_src_t[2];

  assign arm_sel   = wptr;
  assign sh_sample = (cap_st == C_SH);
  assign e_src_sh  = (cfg.mode == MODE_SH);

  // ---------------- capture
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_st       <= C_IDLE;
      wptr         <= '0;
      armed_t      <= 1'b0;
      armed_e      <= 1'b0;
      timer        <= '0;
      lost_pending <= 1'b0;
      for (int i = 0; i < N_TAC; i++) begin
        s_tcoarse[i] <= '0;
        s_ecoarse[i] <= '0;
        s_mode[i]    <= 1'b0;
        s_lost[i]    <= 1'b0;
        s_tmo[i]     <= 1'b0;
      end
    end else begin
      unique case (cap_st)
        C_IDLE: begin
          // Arm only on a free buffer and a quiet trigger source, so that a
          // source still high from an earlier hit does not fire the TAC.
          armed_t <= cfg.enable && slot_st[wptr] == S_FREE && !sync_src_t[1]
                     && !trig_t_rise;
          if (armed_t && trig_t_rise) begin
            armed_t           <= 1'b0;
            s_tcoarse[wptr]   <= coarse - 1'b1;
            s_mode[wptr]      <= cfg.mode;
            s_lost[wptr]      <= lost_pending;
            s_tmo[wptr]       <= 1'b0;
            lost_pending      <= 1'b0;
            if (cfg.mode == MODE_SH) begin
              cap_st <= C_SH;
              timer  <= (cfg.sh_window == 8'd0) ? 10'd1 : {2'b00, cfg.sh_window};
            end else begin
              cap_st <= C_TOT_HI;
              timer  <= 10'(TOT_TIMEOUT);
            end
          end else if (cfg.enable && src_t_rise && !armed_t &&
                       slot_st[wptr] != S_FREE) begin
            lost_pending <= 1'b1;
          end
        end
        C_SH: begin
          if (timer == 10'd1) begin
            s_ecoarse[wptr] <= coarse;
            cap_st          <= C_IDLE;
            wptr            <= wptr + 1'b1;
          end
          timer <= timer - 1'b1;
        end
        C_TOT_HI: begin
          timer <= timer - 1'b1;
          if (sync_src_e[1]) begin
            cap_st  <= C_TOT_LO;
            armed_e <= 1'b1;
          end else if (timer == 10'd0) begin
            s_ecoarse[wptr] <= coarse;
            s_tmo[wptr]     <= 1'b1;
            cap_st          <= C_IDLE;
            wptr            <= wptr + 1'b1;
          end
        end
        C_TOT_LO: begin
          timer <= timer - 1'b1;
          if (trig_e_rise) begin
            armed_e         <= 1'b0;
            s_ecoarse[wptr] <= coarse - 1'b1;
            cap_st          <= C_IDLE;
            wptr            <= wptr + 1'b1;
          end else if (timer == 10'd0) begin
            armed_e         <= 1'b0;
            s_ecoarse[wptr] <= coarse;
            s_tmo[wptr]     <= 1'b1;
            cap_st          <= C_IDLE;
            wptr            <= wptr + 1'b1;
          end
        end
        default: cap_st <= C_IDLE;
      endcase
    end
  end

  // ---------------- conversion
  logic t_busy, t_done, e_busy, e_done, t_got, e_got, cnv_start;
  logic [FINE_W-1:0] t_val, e_val;

  wilkinson_counter #(.W(FINE_W)) u_adc_t (
    .clk, .rst_n, .start(cnv_start), .comp_out(comp_out_t),
    .busy(t_busy), .done(t_done), .value(t_val)
  );
  wilkinson_counter #(.W(FINE_W)) u_adc_e (
    .clk, .rst_n, .start(cnv_start), .comp_out(comp_out_e),
    .busy(e_busy), .done(e_done), .value(e_val)
  );

  assign conv_sel  = cptr;
  assign cnv_start = !conv_en && !tac_rst && slot_st[cptr] == S_READY;

  // ---------------- slot state, conversion and output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_en <= 1'b0;
      tac_rst <= 1'b0;
      t_got   <= 1'b0;
      e_got   <= 1'b0;
      cptr    <= '0;
      rptr    <= '0;
      for (int i = 0; i < N_TAC; i++) begin
        slot_st[i] <= S_FREE;
        s_tfine[i] <= '0;
        s_efine[i] <= '0;
      end
    end else begin
      tac_rst <= 1'b0;
      // capture completes: buffer waits for its conversion
      if (cap_st != C_IDLE && cap_st != C_SH) begin
        if ((cap_st == C_TOT_LO && (trig_e_rise || timer == 10'd0)) ||
            (cap_st == C_TOT_HI && !sync_src_e[1] && timer == 10'd0))
          slot_st[wptr] <= S_READY;
      end else if (cap_st == C_SH && timer == 10'd1) begin
        slot_st[wptr] <= S_READY;
      end
      if (cnv_start) begin
        conv_en       <= 1'b1;
        t_got         <= 1'b0;
        e_got         <= 1'b0;
        slot_st[cptr] <= S_CONV;
      end else if (conv_en) begin
        if (t_done) begin
          s_tfine[cptr] <= t_val;
          t_got         <= 1'b1;
        end
        if (e_done) begin
          s_efine[cptr] <= e_val;
          e_got         <= 1'b1;
        end
        if ((t_got || t_done) && (e_got || e_done)) begin
          conv_en       <= 1'b0;
          tac_rst       <= 1'b1;
          slot_st[cptr] <= S_DONE;
        end
      end
      if (tac_rst) cptr <= cptr + 1'b1;
      if (evt_valid && evt_ready) begin
        slot_st[rptr] <= S_FREE;
        rptr          <= rptr + 1'b1;
      end
    end
  end

  assign evt_valid = (slot_st[rptr] == S_DONE);
  always_comb begin
    evt.channel = ch_id;
    evt.tac     = rptr;
    evt.tcoarse = s_tcoarse[rptr];
    evt.tfine   = s_tfine[rptr];
    evt.ecoarse = s_ecoarse[rptr];
    evt.efine   = s_efine[rptr];
    evt.mode    = s_mode[rptr];
    evt.lost    = s_lost[rptr];
    evt.timeout = s_tmo[rptr];
    evt.spare   = 1'b0;
  end

`ifndef SYNTHESIS
  // A buffer is only written by the capture logic while it is free.
  a_capture_free: assert property (@(posedge clk) disable iff (!rst_n)
    (cap_st == C_IDLE && armed_t) |-> slot_st[wptr] == S_FREE);
  // The event stays stable while it waits for acceptance.
  a_evt_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (evt_valid && !evt_ready) |=> evt_valid && $stable(evt));
`endif
endmodule
