// tb_tcp_arbiter: self-checking test of the TCP Arbiter state machine.
// Behavioural models stand in for the ring buffer and the FIFO: each shows
// its oldest event header and serves payload with one clock of read
// latency, optionally with random pauses. A sink plays the TCP engine and
// parses the byte stream back into events.
//  1. Both sources preloaded with events numbered R:{0,2,3,7} F:{1,2,5,6};
//     the events must come out oldest first, a tie going to the FIFO
//     (NEIGHBOR), each in the matching state, and with no gap inside an
//     event (one byte per clock) when nothing stalls.
//  2. Random arrivals, source pauses and tx_full: every event intact, each
//     source in order, tx_wr never high with tx_full.
//  3. Event numbers across the 32-bit wrap: 0xFFFFFFFF is older than 1.
module tb_tcp_arbiter;
  import daisy_pkg::*;
  logic clk = 0, rst = 1;
  logic ring_head_valid, ring_head_pop, ring_rd, ring_rd_ok, ring_rd_valid;
  ev_header_t ring_head, fifo_head;
  logic [63:0] ring_rd_data;
  logic fifo_head_valid, fifo_head_pop, fifo_rd, fifo_rd_ok, fifo_rd_valid;
  logic [7:0] fifo_rd_data, tx_data;
  logic tx_wr, tx_full = 0, ev_done;
  tcp_arb_state_e state;
  int checks = 0, failures = 0;
  int n_my = 0, n_nb = 0;

  tcp_arbiter dut (.*);

  always #4 clk = ~clk;

  // ---------------- source models ----------------
  ev_header_t r_hq [$], f_hq [$];
  logic [63:0] r_wq [$];
  logic [7:0]  f_bq [$];
  int r_left = 0, f_left = 0;
  bit stall_en = 0, r_stall = 0, f_stall = 0;

  assign ring_head_valid = (r_hq.size() != 0) && (r_left == 0);
  assign ring_head       = (r_hq.size() != 0) ? r_hq[0] : '0;
  assign ring_rd_ok      = (r_left != 0) && !r_stall;
  assign fifo_head_valid = (f_hq.size() != 0) && (f_left == 0);
  assign fifo_head       = (f_hq.size() != 0) ? f_hq[0] : '0;
  assign fifo_rd_ok      = (f_left != 0) && !f_stall;

  always @(posedge clk) begin
    ring_rd_valid <= 1'b0;
    fifo_rd_valid <= 1'b0;
    if (!rst) begin
      if (ring_head_pop) begin
        checks++;
        if (!ring_head_valid) begin failures++; $display("FAIL: ring pop without head"); end
        r_left <= int'(r_hq[0].nwords);
        void'(r_hq.pop_front());
      end
      if (fifo_head_pop) begin
        checks++;
        if (!fifo_head_valid) begin failures++; $display("FAIL: fifo pop without head"); end
        f_left <= int'(f_hq[0].nwords) * 8;
        void'(f_hq.pop_front());
      end
      if (ring_rd && ring_rd_ok) begin
        ring_rd_valid <= 1'b1; ring_rd_data <= r_wq.pop_front(); r_left <= r_left - 1;
      end
      if (fifo_rd && fifo_rd_ok) begin
        fifo_rd_valid <= 1'b1; fifo_rd_data <= f_bq.pop_front(); f_left <= f_left - 1;
      end
    end
  end
  always @(negedge clk) begin
    r_stall = stall_en && ($urandom_range(0, 3) == 0);
    f_stall = stall_en && ($urandom_range(0, 3) == 0);
    tx_full = stall_en && ($urandom_range(0, 4) == 0);
  end

  // expected streams per source (header then payload bytes)
  byte unsigned exp_r [$][$], exp_f [$][$];

  task automatic add_ring(logic [EVNUM_W-1:0] ev, int n);
    ev_header_t h;
    byte unsigned e [$];
    h = '{evnum: ev, board_id: 16'h1111, nwords: 16'(n)};
    for (int i = 7; i >= 0; i--) e.push_back(h[8*i +: 8]);
    r_hq.push_back(h);
    for (int i = 0; i < n; i++) begin
      logic [63:0] w;
      w = {$urandom, $urandom};
      r_wq.push_back(w);
      for (int k = 7; k >= 0; k--) e.push_back(w[8*k +: 8]);
    end
    exp_r.push_back(e);
  endtask

  task automatic add_fifo(logic [EVNUM_W-1:0] ev, int n);
    ev_header_t h;
    byte unsigned e [$];
    h = '{evnum: ev, board_id: 16'h2222, nwords: 16'(n)};
    for (int i = 7; i >= 0; i--) e.push_back(h[8*i +: 8]);
    f_hq.push_back(h);
    for (int i = 0; i < n * 8; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      f_bq.push_back(b);
      e.push_back(b);
    end
    exp_f.push_back(e);
  endtask

  // ---------------- sink ----------------
  byte unsigned cur [$];
  int need = 8, first_cyc = 0, cyc = 0, gaps_checked = 0;
  bit check_gaps = 0;
  tcp_arb_state_e ev_state;
  logic [EVNUM_W-1:0] order [$];
  bit src_order [$];   // 1: ring buffer
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (!rst) begin
    if (tx_full && tx_wr) begin failures++; $display("FAIL: write while full"); end
    if (tx_wr) begin
      if (cur.size() == 0) begin first_cyc = cyc; ev_state = state; end
      cur.push_back(tx_data);
      if (cur.size() == 8) need = 8 + 8 * int'({cur[6], cur[7]});
      if (cur.size() == need) begin
        bit from_ring;
        byte unsigned e [$];
        from_ring = ({cur[4], cur[5]} == 16'h1111);
        order.push_back({cur[0], cur[1], cur[2], cur[3]});
        src_order.push_back({cur[4], cur[5]} == 16'h1111);
        checks++;
        if (from_ring) begin
          n_my++;
          if (ev_state != MYROESTI) begin failures++; $display("FAIL: ring event sent in state %s", ev_state.name()); end
          e = exp_r.pop_front();
        end else begin
          n_nb++;
          if (ev_state != NEIGHBOR) begin failures++; $display("FAIL: fifo event sent in state %s", ev_state.name()); end
          e = exp_f.pop_front();
        end
        checks++;
        if (e != cur) begin failures++; $display("FAIL: event %h content differs", {cur[0], cur[1], cur[2], cur[3]}); end
        if (check_gaps) begin
          checks++; gaps_checked++;
          if (cyc - first_cyc != need - 1) begin failures++; $display("FAIL: event took %0d clocks for %0d bytes", cyc - first_cyc + 1, need); end
        end
        cur = {}; need = 8;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_idle();
    @(negedge clk);
    while (r_hq.size() != 0 || f_hq.size() != 0 || r_left != 0 || f_left != 0 || state != SUSPENSION || cur.size() != 0)
      @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    logic [EVNUM_W-1:0] exp_order [$];
    // phase 1: preloaded, no stalls
    add_ring(0, 3); add_ring(2, 5); add_ring(3, 0); add_ring(7, 2);
    add_fifo(1, 2); add_fifo(2, 4); add_fifo(5, 1); add_fifo(6, 3);
    check_gaps = 1;
    repeat (3) @(posedge clk);
    rst <= 0;
    wait_idle();
    exp_order = '{0, 1, 2, 2, 3, 5, 6, 7};
    checks++;
    if (order != exp_order) begin
      failures++; $display("FAIL: phase 1 order wrong");
      foreach (order[i]) $display("  %0d", order[i]);
    end
    checks++;
    if (src_order != '{1, 0, 0, 1, 1, 0, 0, 1}) begin failures++; $display("FAIL: phase 1 source order wrong (tie must go to the FIFO)"); end
    checks++;
    if (gaps_checked != 8) begin failures++; $display("FAIL: %0d events timed", gaps_checked); end
    check_gaps = 0;

    // phase 2: random arrivals and stalls
    stall_en = 1;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 1)) add_ring(EVNUM_W'(100 + i), $urandom_range(0, 6));
      else                      add_fifo(EVNUM_W'(100 + i), $urandom_range(0, 6));
      repeat ($urandom_range(0, 60)) @(negedge clk);
    end
    wait_idle();
    stall_en = 0;
    @(negedge clk);
    checks++;
    if (exp_r.size() != 0 || exp_f.size() != 0) begin failures++; $display("FAIL: events not sent"); end

    // phase 3: wrap of the event number
    order = {};
    @(negedge clk);
    add_fifo(32'h0000_0001, 1);
    add_ring(32'hFFFF_FFFF, 1);
    wait_idle();
    checks++;
    if (order.size() != 2 || order[0] != 32'hFFFF_FFFF) begin failures++; $display("FAIL: wrap order"); end
    checks++;
    if (n_my == 0 || n_nb == 0) begin failures++; $display("FAIL: a state never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
