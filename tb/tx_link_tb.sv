// tx_link_tb: sends random 64-bit events through one link with random
// gaps, in and out of training, and decodes the serial line with the
// reference receiver. Checks: only commas during training and while
// disabled, every event received intact and in order, no decode errors,
// and the rate of one event per 40 clock cycles (two bits per clock)
// when back-to-back.
module tx_link_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic training, tx_enable, evt_valid, evt_ready;
  logic [1:0] tx;
  logic [63:0] evt;
  logic evt_stb; logic [63:0] evt_word; int n_comma, n_err, n_evt;
  int checks = 0, failures = 0;
  logic [63:0] q[$];

  tx_link dut (.clk, .rst_n, .training, .tx_enable, .evt, .evt_valid, .evt_ready, .tx);
  link_rx_model rx (.clk, .rst_n, .tx, .evt_stb, .evt_word, .n_comma, .n_err, .n_evt);

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (evt_stb) begin
      if (q.size() == 0) chk("unexpected event", 0);
      else begin
        logic [63:0] e;
        e = q.pop_front();
        chk($sformatf("event %h got %h", e, evt_word), e == evt_word);
      end
    end
  end

  // Producer: pushes 'n' events, with random idle gaps if 'gaps'.
  task automatic produce(int n, bit gaps);
    for (int i = 0; i < n; i++) begin
      if (gaps) repeat ($urandom_range(0, 100)) @(posedge clk);
      @(negedge clk);
      evt       = {$urandom, $urandom};
      evt_valid = 1;
      while (!evt_ready) @(negedge clk);
      q.push_back(evt);
      @(posedge clk);
      #1 evt_valid = 0;
    end
  endtask

  initial begin
    int t0, t1, n_before;
    training = 1; tx_enable = 1; evt_valid = 0; evt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // training: an offered event is not taken
    evt_valid <= 1; evt <= 64'h1234;
    repeat (300) @(posedge clk);
    chk("no event taken in training", rx.n_evt == 0 && q.size() == 0);
    chk("commas received in training", n_comma > 10);
    evt_valid <= 0;
    training = 0; tx_enable = 0;
    repeat (50) @(posedge clk);
    chk("disabled link takes nothing", evt_ready == 0);
    tx_enable = 1;
    produce(40, 1);
    repeat (200) @(posedge clk);
    // back-to-back rate
    n_before = n_evt;
    t0 = $time;
    produce(20, 0);
    repeat (200) @(posedge clk);
    t1 = $time;
    chk("all events received", q.size() == 0 && n_evt == n_before + 20);
    chk("decode errors", n_err == 0);
    chk("back-to-back events every 40 cycles", n_back2back >= 15);
    // training again must leave only commas
    training = 1;
    n_before = n_evt;
    repeat (200) @(posedge clk);
    chk("no data in training", n_evt == n_before);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Rate: while events are offered back to back, takes are 80 cycles apart.
  int last_take = -1;
  int n_back2back = 0;
  always @(posedge clk) begin
    if (evt_valid && evt_ready) begin
      if (last_take >= 0 && $time - last_take < 400) chk("take spacing >= 40 cycles", 0);
      if (last_take >= 0 && $time - last_take == 400) n_back2back++;
      last_take = $time;
    end
  end
endmodule
