// global_ctrl: data-push global controller of the readout.
//
// Every channel offers its digitised hits as event words with a
// valid/ready handshake. A round-robin arbiter takes at most one event
// per clock cycle, starting its search after the channel served last, so
// that no channel can starve the others. Accepted events wait in a FIFO of
// FIFO_DEPTH words; the FIFO head goes to whichever of the N_LINKS serial
// links is ready to start a new frame (link 0 first). When the FIFO is
// full the channels are simply not served and keep their events in their
// own analog buffers.
//
// The data-push principle, the 64 channels and the two 8B/10B links follow
// the ASIC description; the arbitration, the FIFO and its depth are this
// design's choices. Latency from channel to FIFO is one cycle.
module global_ctrl
  import tiger_pkg::*;
#(
  parameter int NCH        = N_CH,
  parameter int NLINK      = N_LINKS,
  parameter int FIFO_DEPTH = 16,
  parameter int BPC        = LINK_BPC
) (
  input  logic     clk,
  input  logic     rst_n,
  input  glb_cfg_t gcfg,
  input  event_t   ch_evt   [NCH],
  input  logic     ch_valid [NCH],
  output logic     ch_ready [NCH],
  output logic [BPC-1:0] tx [NLINK],
  output logic     fifo_full   // FIFO holds FIFO_DEPTH events
);
  localparam int AW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int CW = (NCH > 1) ? $clog2(NCH) : 1;

  // ---------------- round-robin arbiter
  logic [CW-1:0] last, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = last;
    for (int i = 1; i <= NCH; i++) begin
      logic [CW:0] idx;
      idx = (CW+1)'(last) + (CW+1)'(i);
      if (idx >= (CW+1)'(NCH)) idx = idx - (CW+1)'(NCH);
      if (!found && ch_valid[idx[CW-1:0]]) begin
        found = 1'b1;
        pick  = idx[CW-1:0];
      end
    end
  end

  // ---------------- FIFO
  event_t          mem [FIFO_DEPTH];
  logic [AW:0]     count;
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic            push, pop;
  logic            link_ready [NLINK];
  logic            link_valid [NLINK];

  assign fifo_full = (count == (AW+1)'(FIFO_DEPTH));
  assign push      = found && !fifo_full;

  always_comb begin
    for (int c = 0; c < NCH; c++) ch_ready[c] = push && (pick == CW'(c));
  end

  // FIFO head goes to the first ready link.
  always_comb begin
    logic taken;
    taken = 1'b0;
    for (int l = 0; l < NLINK; l++) begin
      link_valid[l] = (count != '0) && !taken;
      if ((count != '0) && link_ready[l]) taken = 1'b1;
    end
    pop = taken;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last   <= '0;
      count  <= '0;
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= ch_evt[pick];
        wr_ptr      <= (wr_ptr == AW'(FIFO_DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
        last        <= pick;
      end
      if (pop) rd_ptr <= (rd_ptr == AW'(FIFO_DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // ---------------- links
  for (genvar l = 0; l < NLINK; l++) begin : g_link
    tx_link #(.BPC(BPC)) u_link (
      .clk, .rst_n,
      .training (gcfg.training),
      .tx_enable(gcfg.tx_enable),
      .evt      (mem[rd_ptr]),
      .evt_valid(link_valid[l]),
      .evt_ready(link_ready[l]),
      .tx       (tx[l])
    );
  end

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(FIFO_DEPTH));
`endif
endmodule
