// tb_chain_throughput: the throughput measurement on a chain of six boards
// at the full default sizes (37112-byte events).
//
// Board 0 is next to the DAQ PC and board 5 is the last. As in
// tb_roesti_fpga, the TCP/IP engines are stood in for by a byte pipe:
// engine 1 of board i feeds engine 0 of board i-1 and is held off while
// that board's FIFO is nearly full (the TCP window). Here the DAQ end takes
// one byte every clock, so the link to the DAQ is limited only by the
// chain itself, and no frames are sent. All boards share one trigger.
//
// Phase A fires triggers slower than the chain can drain: every board must
// accept every trigger (none ignored) and every event must reach the DAQ,
// so the delivered rate follows the trigger rate. Phase B fires triggers
// much faster than that: the chain saturates, triggers are ignored, and
// over a window in the middle of the phase the DAQ must receive at least
// 0.99 bytes per clock (1064 Mbit/s at 133 MHz, above the 950 Mbit/s that
// TCP can carry on Gigabit Ethernet). The boards must also share the link:
// the numbers of events each board accepted may differ by at most 2,
// because the older event always leaves first. At the end every accepted
// event must have arrived whole, in order per board, with its samples
// intact, and no FIFO may have overflowed.
//
// The six boards and the 37112-byte event size are those of the published
// measurement; trigger periods, the one-byte-per-clock DAQ and the pass
// bounds are this test's choices.
module tb_chain_throughput;
  import daisy_pkg::*;
  localparam int NB = 6;
  localparam int NREG = 16;
  localparam int PW = 4638;
  localparam int EV_BYTES = 8 * (PW + 1);
  localparam int NTRIG_A = 2;
  localparam int PERIOD_A = NB * EV_BYTES * 5 / 4;   // 25 % spare
  localparam int NTRIG_B = 10;
  localparam int PERIOD_B = 30000;                   // far above saturation
  localparam int WIN_START = 120000;                 // measurement window in phase B
  localparam int WIN_LEN = 150000;

  logic clk_gmii = 0, clk_sys = 0, rst_gmii = 1, rst_sys = 1, trig_in = 0;
  always #4 clk_gmii = ~clk_gmii;
  always #3.75 clk_sys = ~clk_sys;

  logic        adc_start [NB], adc_valid [NB], adc_ready [NB];
  logic [15:0] adc_data [NB];
  gmii_t       sfp0_tx [NB], sfp1_tx [NB], sitcp0_rx [NB], sitcp1_rx [NB];
  logic [47:0] mac0 [NB], mac1 [NB];
  logic        t0_rx_wr [NB], t1_tx_wr [NB], t1_tx_full [NB];
  logic [7:0]  t0_rx_data [NB], t1_tx_data [NB];
  logic [15:0] t0_rx_wc [NB];
  logic        sc_we [NB], sc_re [NB], sc_ack [NB];
  logic [31:0] sc_addr [NB];
  logic [7:0]  sc_wd [NB], sc_rd [NB];
  logic [7:0]  regs [NB][NREG];
  logic [2:0]  stat_sel0 [NB], stat_sel1 [NB];
  logic [3:0]  stat_arb0 [NB], stat_arb1 [NB];
  tcp_arb_state_e arb_state [NB];
  logic        ev_done [NB], daq_busy [NB], trig_ignored [NB], rx_overflow [NB];

  int checks = 0, failures = 0;
  int n_ign = 0, n_acc [NB];

  for (genvar b = 0; b < NB; b++) begin : g_board
    roesti_fpga dut (
      .clk_gmii, .rst_gmii, .clk_sys, .rst_sys, .trig_in,
      .adc_start(adc_start[b]), .adc_valid(adc_valid[b]), .adc_data(adc_data[b]), .adc_ready(adc_ready[b]),
      .sfp0_rx(gmii_t'('0)), .sfp0_tx(sfp0_tx[b]), .sfp1_rx(gmii_t'('0)), .sfp1_tx(sfp1_tx[b]),
      .mac0(mac0[b]), .mac1(mac1[b]),
      .sitcp0_rx(sitcp0_rx[b]), .sitcp0_tx(gmii_t'('0)), .sitcp1_rx(sitcp1_rx[b]), .sitcp1_tx(gmii_t'('0)),
      .sitcp0_tcp_rx_wr(t0_rx_wr[b]), .sitcp0_tcp_rx_data(t0_rx_data[b]), .sitcp0_tcp_rx_wc(t0_rx_wc[b]),
      .sitcp1_tcp_tx_data(t1_tx_data[b]), .sitcp1_tcp_tx_wr(t1_tx_wr[b]), .sitcp1_tcp_tx_full(t1_tx_full[b]),
      .sc_we(sc_we[b]), .sc_re(sc_re[b]), .sc_addr(sc_addr[b]), .sc_wd(sc_wd[b]), .sc_ack(sc_ack[b]), .sc_rd(sc_rd[b]),
      .regs(regs[b]), .stat_sel0(stat_sel0[b]), .stat_sel1(stat_sel1[b]),
      .stat_arb0(stat_arb0[b]), .stat_arb1(stat_arb1[b]),
      .arb_state(arb_state[b]), .ev_done(ev_done[b]), .daq_busy(daq_busy[b]),
      .trig_ignored(trig_ignored[b]), .rx_overflow(rx_overflow[b])
    );
    assign mac0[b] = 48'h02_00_00_00_10_00 + 48'(b);
    assign mac1[b] = 48'h02_00_00_00_20_00 + 48'(b);
    if (b > 0) begin : g_link
      always_ff @(posedge clk_sys) begin
        t0_rx_wr[b-1]   <= t1_tx_wr[b];
        t0_rx_data[b-1] <= t1_tx_data[b];
      end
      assign t1_tx_full[b] = (int'(t0_rx_wc[b-1]) >= 65536 - 64);
    end
    // digitizer model: a counting sample stream tagged with the board
    logic [11:0] s;
    always_ff @(posedge clk_sys) begin
      if (rst_sys) s <= '0;
      else if (adc_valid[b] && adc_ready[b]) s <= s + 1'b1;
    end
    assign adc_valid[b] = 1'b1;
    assign adc_data[b] = {4'(b), s};
  end
  assign t0_rx_wr[NB-1] = 1'b0;
  assign t0_rx_data[NB-1] = '0;
  assign t1_tx_full[0] = 1'b0;

  always @(posedge clk_sys) if (!rst_sys) begin
    for (int b = 0; b < NB; b++) begin
      if (trig_ignored[b]) n_ign++;
      if (adc_start[b]) n_acc[b]++;
      if (rx_overflow[b]) begin failures++; $display("FAIL: board %0d FIFO overflow", b); end
    end
  end

  // DAQ byte counter, sampled for the throughput window
  longint daq_bytes = 0;
  always @(posedge clk_sys) if (!rst_sys && t1_tx_wr[0]) daq_bytes++;

  // ---------------- DAQ event checker ----------------
  byte unsigned cur [$];
  int need = 8, n_rx = 0, n_rx_b [NB];
  logic [11:0] next_s [NB];
  logic [EVNUM_W-1:0] last_ev [NB];
  bit seen [NB];
  always @(posedge clk_sys) if (!rst_sys && t1_tx_wr[0]) begin
    cur.push_back(t1_tx_data[0]);
    if (cur.size() == 8) need = 8 + 8 * int'({cur[6], cur[7]});
    if (cur.size() == need) begin
      int b;
      logic [EVNUM_W-1:0] ev;
      int bad;
      ev = {cur[0], cur[1], cur[2], cur[3]};
      b = int'({cur[4], cur[5]}) - 'h0A00;
      checks++;
      if (b < 0 || b >= NB || need != EV_BYTES) begin
        failures++; $display("FAIL: event with board id %h, %0d bytes", {cur[4], cur[5]}, need);
      end else begin
        checks++;
        if (seen[b] && !ev_older(last_ev[b], ev)) begin failures++; $display("FAIL: board %0d event %0d after %0d", b, ev, last_ev[b]); end
        seen[b] = 1; last_ev[b] = ev;
        bad = 0;
        for (int i = 8; i < need; i += 2) begin
          if ({cur[i], cur[i+1]} != {4'(b), next_s[b]}) bad++;
          next_s[b] = next_s[b] + 1'b1;
        end
        checks++;
        if (bad != 0) begin failures++; $display("FAIL: board %0d event %0d: %0d bad samples", b, ev, bad); end
        n_rx_b[b]++;
      end
      n_rx++;
      cur = {}; need = 8;
    end
  end

  task automatic sc_write(int b, logic [31:0] a, logic [7:0] d);
    @(negedge clk_sys); sc_we[b] = 1; sc_addr[b] = a; sc_wd[b] = d;
    @(negedge clk_sys); sc_we[b] = 0;
    @(negedge clk_sys);
  endtask

  task automatic fire(int period);
    @(negedge clk_sys) trig_in = 1;
    repeat (4) @(negedge clk_sys);
    trig_in = 0;
    repeat (period - 5) @(negedge clk_sys);
  endtask

  function automatic int total_acc();
    int t = 0;
    for (int b = 0; b < NB; b++) t += n_acc[b];
    return t;
  endfunction

  initial begin
    repeat (4_000_000) @(posedge clk_sys);
    failures++;
    $display("watchdog: %0d events received", n_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint b0, b1;
    int mn, mx;
    real rate;
    for (int b = 0; b < NB; b++) begin
      sc_we[b] = 0; sc_re[b] = 0; sc_addr[b] = '0; sc_wd[b] = '0;
      n_acc[b] = 0; n_rx_b[b] = 0; next_s[b] = '0; seen[b] = 0;
    end
    repeat (5) @(posedge clk_sys);
    rst_gmii = 0; rst_sys = 0;
    for (int b = 0; b < NB; b++) begin
      sc_write(b, 0, 8'h0A);
      sc_write(b, 1, 8'(b));
    end

    // ---- phase A: below saturation ----
    for (int t = 0; t < NTRIG_A; t++) fire(PERIOD_A);
    while (n_rx < total_acc()) @(posedge clk_sys);
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (n_acc[b] != NTRIG_A || n_rx_b[b] != NTRIG_A) begin
        failures++; $display("FAIL: phase A board %0d accepted %0d, delivered %0d of %0d triggers", b, n_acc[b], n_rx_b[b], NTRIG_A);
      end
    end
    checks++;
    if (n_ign != 0) begin failures++; $display("FAIL: phase A ignored %0d triggers", n_ign); end
    $display("phase A: %0d triggers, %0d events delivered, none ignored", NTRIG_A, n_rx);
    for (int b = 0; b < NB; b++) n_acc[b] = 0;

    // ---- phase B: above saturation ----
    fork
      for (int t = 0; t < NTRIG_B; t++) fire(PERIOD_B);
      begin
        repeat (WIN_START) @(posedge clk_sys);
        b0 = daq_bytes;
        repeat (WIN_LEN) @(posedge clk_sys);
        b1 = daq_bytes;
      end
    join
    rate = real'(b1 - b0) / real'(WIN_LEN);
    $display("phase B: %0.4f bytes per clock at the DAQ (%0.0f Mbit/s at 133 MHz), %0d triggers ignored",
             rate, rate * 8.0 * 133.0, n_ign);
    checks++;
    if (rate < 0.99) begin failures++; $display("FAIL: saturated rate %0.4f below 0.99 byte/clock", rate); end
    checks++;
    if (n_ign == 0) begin failures++; $display("FAIL: no trigger ignored at saturation"); end

    while (n_rx < total_acc() + NB * NTRIG_A) @(posedge clk_sys);
    repeat (100) @(posedge clk_sys);
    mn = n_acc[0]; mx = n_acc[0];
    for (int b = 0; b < NB; b++) begin
      $display("board %0d: %0d events accepted in phase B, %0d delivered in all", b, n_acc[b], n_rx_b[b]);
      if (n_acc[b] < mn) mn = n_acc[b];
      if (n_acc[b] > mx) mx = n_acc[b];
      checks++;
      if (n_rx_b[b] != n_acc[b] + NTRIG_A) begin failures++; $display("FAIL: board %0d lost events", b); end
    end
    checks++;
    if (mn == 0 || mx - mn > 2) begin failures++; $display("FAIL: unfair share, %0d to %0d events per board", mn, mx); end
    $display("events received: %0d (%0d bytes each)", n_rx, EV_BYTES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
