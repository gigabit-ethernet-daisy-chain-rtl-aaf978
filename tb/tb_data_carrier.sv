// tb_data_carrier: self-checking test of the event-data path (ring buffer,
// FIFO and TCP Arbiter together) with small buffers.
// Own events are written through the ring-buffer port with back-pressure;
// events of the previous board arrive as a TCP byte stream whose sender
// obeys the window given by rx_wc. The TCP sink pauses at random. Checks
// every event byte for byte, the order within each source, that both the
// ring buffer's back-pressure and the FIFO's window held data back, that
// no byte was lost (rx_overflow) and that, with both buffers preloaded,
// the older event goes first.
module tb_data_carrier;
  import daisy_pkg::*;
  localparam int RD = 32, FD = 128;
  logic clk = 0, rst = 1;
  logic ring_wr_en = 0, ring_wr_ready, rx_wr = 0, rx_overflow, tx_wr, tx_full = 0, ev_done;
  logic [63:0] ring_wr_data = 0;
  logic [7:0] rx_data = 0, tx_data;
  logic [15:0] rx_wc;
  tcp_arb_state_e arb_state;
  int checks = 0, failures = 0, ring_held = 0, window_held = 0, n_done = 0;
  bit sink_pause = 0;

  data_carrier #(.RING_DEPTH(RD), .FIFO_DEPTH(FD)) dut (.*);

  always #4 clk = ~clk;
  always @(negedge clk) tx_full = sink_pause && ($urandom_range(0, 2) == 0);
  always @(posedge clk) if (!rst) begin
    if (ring_wr_en && !ring_wr_ready) ring_held++;
    if (ev_done) n_done++;
  end

  byte unsigned exp_r [$][$], exp_f [$][$];
  byte unsigned cur [$];
  int need = 8;
  logic [EVNUM_W-1:0] order [$];

  always @(posedge clk) if (!rst && tx_wr) begin
    cur.push_back(tx_data);
    if (cur.size() == 8) need = 8 + 8 * int'({cur[6], cur[7]});
    if (cur.size() == need) begin
      byte unsigned e [$];
      order.push_back({cur[0], cur[1], cur[2], cur[3]});
      if ({cur[4], cur[5]} == 16'hAAAA) e = exp_r.pop_front(); else e = exp_f.pop_front();
      checks++;
      if (e != cur) begin failures++; $display("FAIL: event %h differs", {cur[0], cur[1], cur[2], cur[3]}); end
      cur = {}; need = 8;
    end
  end

  task automatic ring_event(logic [EVNUM_W-1:0] ev, int n);
    byte unsigned e [$];
    logic [63:0] w;
    for (int i = 0; i <= n; i++) begin
      w = (i == 0) ? {ev, 16'hAAAA, 16'(n)} : {$urandom, $urandom};
      for (int k = 7; k >= 0; k--) e.push_back(w[8*k +: 8]);
    end
    exp_r.push_back(e);
    foreach (e[i]) if (i % 8 == 0) begin
      @(negedge clk);
      ring_wr_en = 1;
      ring_wr_data = {e[i], e[i+1], e[i+2], e[i+3], e[i+4], e[i+5], e[i+6], e[i+7]};
      @(posedge clk);
      while (!ring_wr_ready) @(posedge clk);
      @(negedge clk) ring_wr_en = 0;
    end
  endtask

  task automatic fifo_event(logic [EVNUM_W-1:0] ev, int n);
    byte unsigned e [$];
    ev_header_t h;
    h = '{evnum: ev, board_id: 16'hBBBB, nwords: 16'(n)};
    for (int i = 7; i >= 0; i--) e.push_back(h[8*i +: 8]);
    for (int i = 0; i < 8 * n; i++) e.push_back(8'($urandom));
    exp_f.push_back(e);
    foreach (e[i]) begin
      @(negedge clk);
      while (int'(rx_wc) >= FD - 2) begin window_held++; rx_wr = 0; @(negedge clk); end
      rx_wr = 1; rx_data = e[i];
      @(negedge clk) rx_wr = 0;
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [EVNUM_W-1:0] exp_order [$];
    int total;
    repeat (3) @(posedge clk);
    rst <= 0;
    // preload with the sink closed: the older event must go first
    tx_full = 1;
    sink_pause = 0;
    force tx_full = 1'b1;
    ring_event(20, 2);
    fifo_event(19, 2);
    ring_event(21, 1);
    repeat (20) @(negedge clk);
    release tx_full;
    wait (exp_r.size() == 0 && exp_f.size() == 0);
    exp_order = '{20, 19, 21};
    // event 20 was alone when the arbiter first looked; it is taken first,
    // then 19 (older than 21)
    checks++;
    if (order != exp_order) begin failures++; $display("FAIL: preload order"); foreach (order[i]) $display(" %0d", order[i]); end
    // random traffic from both sides with a pausing sink
    sink_pause = 1;
    order = {};
    fork
      for (int i = 0; i < 25; i++) begin ring_event(EVNUM_W'(100 + 2 * i), $urandom_range(0, 80)); repeat ($urandom_range(0, 40)) @(negedge clk); end
      for (int i = 0; i < 25; i++) begin fifo_event(EVNUM_W'(101 + 2 * i), $urandom_range(0, 30)); repeat ($urandom_range(0, 40)) @(negedge clk); end
    join
    wait (exp_r.size() == 0 && exp_f.size() == 0);
    repeat (10) @(negedge clk);
    total = 53;
    checks += 5;
    if (n_done != total) begin failures++; $display("FAIL: %0d events done, expected %0d", n_done, total); end
    if (ring_held == 0) begin failures++; $display("FAIL: ring buffer never held the writer"); end
    if (window_held == 0) begin failures++; $display("FAIL: FIFO window never closed"); end
    if (rx_overflow) begin failures++; $display("FAIL: FIFO overflow"); end
    if (arb_state != SUSPENSION) begin failures++; $display("FAIL: arbiter not idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
