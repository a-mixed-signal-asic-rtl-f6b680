// global_ctrl_tb: 64 channel sources push random events into the global
// controller; both links are decoded with the reference receiver. Checks:
// every event arrives exactly once over one of the two links, no event
// leaves while the links train, round-robin order when all channels
// request at once (64 consecutive grants go to 64 different channels),
// both links carry traffic, and the FIFO fills under the burst (the
// channels are held back rather than losing data).
module global_ctrl_tb;
  import tiger_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  glb_cfg_t gcfg;
  event_t ch_evt [N_CH];
  logic ch_valid [N_CH], ch_ready [N_CH];
  logic [LINK_BPC-1:0] tx [N_LINKS];
  logic fifo_full;
  int checks = 0, failures = 0;

  global_ctrl dut (.clk, .rst_n, .gcfg, .ch_evt, .ch_valid, .ch_ready, .tx, .fifo_full);

  logic stb [N_LINKS];
  logic [63:0] word [N_LINKS];
  int nc [N_LINKS], ne [N_LINKS], nv [N_LINKS];
  for (genvar l = 0; l < N_LINKS; l++) begin : g_rx
    link_rx_model rx (.clk, .rst_n, .tx(tx[l]), .evt_stb(stb[l]), .evt_word(word[l]),
                      .n_comma(nc[l]), .n_err(ne[l]), .n_evt(nv[l]));
  end

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int pending [logic [63:0]];
  int n_sent = 0, n_recv = 0, full_cycles = 0;
  int remaining [N_CH];
  int grants [$];

  always @(posedge clk) begin
    for (int l = 0; l < N_LINKS; l++) if (stb[l]) begin
      n_recv++;
      if (!pending.exists(word[l])) chk($sformatf("unknown event %h", word[l]), 0);
      else begin
        pending[word[l]]--;
        if (pending[word[l]] == 0) pending.delete(word[l]);
      end
    end
    if (fifo_full) full_cycles++;
  end

  // Channel sources
  always @(posedge clk) begin
    if (rst_n) for (int c = 0; c < N_CH; c++) begin
      if (ch_valid[c] && ch_ready[c]) begin
        grants.push_back(c);
        if (remaining[c] > 0) begin
          // a channel with more hits requests again at once
          remaining[c]--;
          ch_evt[c] <= make_event(c);
        end else begin
          ch_valid[c] <= 1'b0;
        end
      end
    end
  end

  function automatic event_t make_event(int c);
    event_t e;
    e = event_t'({$urandom, $urandom});
    e.channel = CH_W'(c);
    if (pending.exists(e)) pending[e]++; else pending[e] = 1;
    n_sent++;
    return e;
  endfunction

  task automatic offer(int c);
    ch_evt[c] = make_event(c);
    ch_valid[c] = 1'b1;
  endtask

  initial begin
    gcfg = '0; gcfg.training = 1;
    for (int c = 0; c < N_CH; c++) begin ch_valid[c] = 0; ch_evt[c] = '0; remaining[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // training: events wait
    @(negedge clk);
    offer(5);
    repeat (400) @(posedge clk);
    chk("nothing sent while training", n_recv == 0);
    gcfg.training = 0; gcfg.tx_enable = 1;
    wait (n_recv == 1);
    // burst: every channel requests at once, each with two hits to send
    grants.delete();
    @(negedge clk);
    for (int c = 0; c < N_CH; c++) begin remaining[c] = 1; offer(c); end
    wait (grants.size() >= N_CH);
    begin
      bit seen [N_CH];
      bit ok = 1;
      foreach (seen[i]) seen[i] = 0;
      for (int i = 0; i < N_CH; i++) begin
        if (seen[grants[i]]) ok = 0;
        seen[grants[i]] = 1;
      end
      chk("round robin serves all 64 once", ok);
      for (int i = 1; i < N_CH; i++)
        if (grants[i] != (grants[i-1] + 1) % N_CH) ok = 0;
      chk("round robin order", ok);
    end
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int c = 0; c < N_CH; c++)
        if (!ch_valid[c] && $urandom_range(0, 999) < 2) offer(c);
    end
    wait (n_recv == n_sent);
    repeat (200) @(posedge clk);
    chk("all events delivered once", pending.size() == 0 && n_recv == n_sent);
    chk("no link errors", ne[0] == 0 && ne[1] == 0);
    chk("both links used", nv[0] > 10 && nv[1] > 10);
    chk("FIFO filled during burst", full_cycles > 0);
    $display("sent=%0d link0=%0d link1=%0d fifo_full_cycles=%0d", n_sent, nv[0], nv[1], full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
