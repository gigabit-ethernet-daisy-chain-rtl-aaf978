// tb_roesti_fpga: end-to-end test of a daisy chain of three boards at the
// full default sizes (64-bit x 4096 ring buffer, 8-bit x 65536 FIFO,
// 37112-byte events).
//
// Board 0 is next to the DAQ PC, board 2 is the last in the chain. Port 1
// of each board is cabled to port 0 of the board before it (frames, 125
// MHz). The TCP/IP engines are not part of the logic, so the testbench
// stands in for them: engine 1 of board i hands its TCP stream to engine 0
// of board i-1 byte for byte, and is held off (tx_full) while the FIFO of
// board i-1 reports less free space than a small margin, as the TCP
// window would. Engine 1 of board 0 streams to a DAQ model that accepts
// about 8 bytes in 9, the rate of TCP payload on Gigabit Ethernet.
//
// The test sets each board's ID over the slow-control bus, fires a common
// trigger faster than the chain can drain, and checks at the DAQ that every
// accepted event of every board arrives whole, with the right samples, in
// event-number order per board. On the frame side it sends a slow-control
// frame from the DAQ to board 2 (passing boards 0 and 1), a broadcast, the
// reply of board 2 back to the DAQ, and a frame of board 0's own engine that
// collides with the passing reply. Each mechanism is counted and must have
// happened at least once: own-address match, pass-through, broadcast,
// collision drop, MYROESTI and NEIGHBOR events, ignored triggers, ring
// buffer back-pressure on the read-out, TCP window closing, slow-control
// acknowledge.
module tb_roesti_fpga;
  import daisy_pkg::*;
  localparam int NB = 3;
  localparam int NREG = 16;
  localparam int PW = 4638;
  localparam int EV_BYTES = 8 * (PW + 1);
  localparam logic [47:0] DAQ_MAC = 48'h02_00_00_00_00_FE;

  logic clk_gmii = 0, clk_sys = 0, rst_gmii = 1, rst_sys = 1, trig_in = 0;
  always #4 clk_gmii = ~clk_gmii;
  always #3.75 clk_sys = ~clk_sys;

  // per-board nets
  logic        adc_start [NB], adc_valid [NB], adc_ready [NB];
  logic [15:0] adc_data [NB];
  gmii_t       sfp0_rx [NB], sfp0_tx [NB], sfp1_rx [NB], sfp1_tx [NB];
  gmii_t       sitcp0_rx [NB], sitcp0_tx [NB], sitcp1_rx [NB], sitcp1_tx [NB];
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
  gmii_t       daq_tx;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_own = 0, n_fwd = 0, n_bcast = 0, n_drop = 0, n_my = 0, n_nb = 0;
  int n_ign = 0, n_bp = 0, n_win = 0, n_ack = 0, n_acc [NB];

  for (genvar b = 0; b < NB; b++) begin : g_board
    roesti_fpga dut (
      .clk_gmii, .rst_gmii, .clk_sys, .rst_sys, .trig_in,
      .adc_start(adc_start[b]), .adc_valid(adc_valid[b]), .adc_data(adc_data[b]), .adc_ready(adc_ready[b]),
      .sfp0_rx(sfp0_rx[b]), .sfp0_tx(sfp0_tx[b]), .sfp1_rx(sfp1_rx[b]), .sfp1_tx(sfp1_tx[b]),
      .mac0(mac0[b]), .mac1(mac1[b]),
      .sitcp0_rx(sitcp0_rx[b]), .sitcp0_tx(sitcp0_tx[b]), .sitcp1_rx(sitcp1_rx[b]), .sitcp1_tx(sitcp1_tx[b]),
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
    // cabling: port 1 of board b to port 0 of board b-1
    assign sfp1_rx[b] = (b == 0) ? daq_tx : sfp0_tx[(b == 0) ? 0 : b - 1];
    assign sfp0_rx[b] = (b == NB - 1) ? gmii_t'('0) : sfp1_tx[(b == NB - 1) ? b : b + 1];
    // TCP link stand-in: board b's engine 1 feeds board b-1's engine 0
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
    // ring buffer holding off the Data I/F (read-out paused)
    always @(posedge clk_sys) if (!rst_sys && dut.ring_wr_en && !dut.ring_wr_ready) n_bp++;
    assign adc_data[b] = {4'(b), s};
  end
  assign t0_rx_wr[NB-1] = 1'b0;
  assign t0_rx_data[NB-1] = '0;


  // DAQ-side engine 1 of board 0: accepts about 8 bytes in 9
  always @(negedge clk_sys) t1_tx_full[0] = ($urandom_range(0, 8) == 0);

  tcp_arb_state_e prev_state [NB];
  always @(posedge clk_sys) if (!rst_sys) begin
    for (int b = 0; b < NB; b++) begin
      if (arb_state[b] == MYROESTI && prev_state[b] != MYROESTI) n_my++;
      if (arb_state[b] == NEIGHBOR && prev_state[b] != NEIGHBOR) n_nb++;
      prev_state[b] = arb_state[b];
      if (trig_ignored[b]) n_ign++;
      if (b > 0 && t1_tx_full[b]) n_win++;
      if (sc_ack[b]) n_ack++;
      if (adc_start[b]) n_acc[b]++;
      if (rx_overflow[b]) begin failures++; $display("FAIL: board %0d FIFO overflow", b); end
    end
  end
  always @(posedge clk_gmii) if (!rst_gmii) begin
    for (int b = 0; b < NB; b++) begin
      n_own   += int'(stat_sel0[b][2]) + int'(stat_sel1[b][2]);
      n_bcast += int'(stat_sel0[b][1]) + int'(stat_sel1[b][1]);
      n_fwd   += int'(stat_sel0[b][0]) + int'(stat_sel1[b][0]);
      n_drop  += int'(stat_arb0[b][1]) + int'(stat_arb0[b][0]) + int'(stat_arb1[b][1]) + int'(stat_arb1[b][0]);
    end
  end

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

  // ---------------- frame side ----------------
  typedef byte unsigned bytes_t [$];
  bytes_t daq_got [$], daq_cur, e2_got [$], e2_cur;
  int bc_seen [NB];
  bytes_t bc_cur [NB];
  always @(posedge clk_gmii) if (!rst_gmii) begin
    if (sfp1_tx[0].en) daq_cur.push_back(sfp1_tx[0].d);
    else if (daq_cur.size() != 0) begin daq_got.push_back(daq_cur); daq_cur = {}; end
    if (sitcp1_rx[NB-1].en) e2_cur.push_back(sitcp1_rx[NB-1].d);
    else if (e2_cur.size() != 0) begin e2_got.push_back(e2_cur); e2_cur = {}; end
    for (int b = 0; b < NB; b++) begin
      if (sitcp1_rx[b].en) bc_cur[b].push_back(sitcp1_rx[b].d);
      else if (bc_cur[b].size() != 0) begin
        if (bc_cur[b][8] == 8'hFF && bc_cur[b][13] == 8'hFF) bc_seen[b]++;
        bc_cur[b] = {};
      end
    end
  end

  function automatic bytes_t make_frame(logic [47:0] da, logic [47:0] sa, int len);
    bytes_t f;
    for (int i = 0; i < PREAMBLE_LEN; i++) f.push_back(PREAMBLE_BYTE);
    f.push_back(SFD_BYTE);
    for (int i = 5; i >= 0; i--) f.push_back(da[8*i +: 8]);
    for (int i = 5; i >= 0; i--) f.push_back(sa[8*i +: 8]);
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    return f;
  endfunction

  task automatic send_daq(bytes_t f);
    foreach (f[i]) begin @(negedge clk_gmii); daq_tx = '{en: 1'b1, d: f[i]}; end
    @(negedge clk_gmii); daq_tx = '0;
    repeat (MIN_IFG) @(negedge clk_gmii);
  endtask

  task automatic send_engine1(int b, bytes_t f);
    foreach (f[i]) begin @(negedge clk_gmii); sitcp1_tx[b] = '{en: 1'b1, d: f[i]}; end
    @(negedge clk_gmii); sitcp1_tx[b] = '0;
  endtask

  task automatic sc_write(int b, logic [31:0] a, logic [7:0] d);
    @(negedge clk_sys); sc_we[b] = 1; sc_addr[b] = a; sc_wd[b] = d;
    @(negedge clk_sys); sc_we[b] = 0;
    @(negedge clk_sys);
  endtask

  task automatic sc_read(int b, logic [31:0] a, output logic [7:0] d);
    @(negedge clk_sys); sc_re[b] = 1; sc_addr[b] = a;
    @(negedge clk_sys); sc_re[b] = 0; d = sc_rd[b];
    @(negedge clk_sys);
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk_sys);
    failures++;
    $display("watchdog: %0d events received", n_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t f_sc, f_bc, f_reply, f_own;
    int total;
    daq_tx = '0;
    for (int b = 0; b < NB; b++) begin
      sitcp0_tx[b] = '0; sitcp1_tx[b] = '0;
      sc_we[b] = 0; sc_re[b] = 0; sc_addr[b] = '0; sc_wd[b] = '0;
      n_acc[b] = 0; n_rx_b[b] = 0; next_s[b] = '0; seen[b] = 0; bc_seen[b] = 0;
      prev_state[b] = SUSPENSION;
    end
    repeat (5) @(posedge clk_sys);
    rst_gmii = 0; rst_sys = 0;

    // board IDs over the slow-control bus: 0x0A00 + board
    for (int b = 0; b < NB; b++) begin
      logic [7:0] d;
      sc_write(b, 0, 8'h0A);
      sc_write(b, 1, 8'(b));
      sc_read(b, 1, d);
      checks++;
      if (d != 8'(b)) begin failures++; $display("FAIL: board %0d register read %h", b, d); end
    end

    fork
      // triggers: common to all boards, faster than the chain drains
      begin
        for (int t = 0; t < 8; t++) begin
          @(negedge clk_sys) trig_in = 1;
          repeat (4) @(negedge clk_sys);
          trig_in = 0;
          repeat (15000) @(negedge clk_sys);
        end
      end
      // frames
      begin
        repeat (200) @(negedge clk_gmii);
        f_sc = make_frame(mac1[NB-1], DAQ_MAC, 60);     // slow control to the last board
        send_daq(f_sc);
        f_bc = make_frame(BCAST_MAC, DAQ_MAC, 46);       // broadcast (e.g. ARP)
        send_daq(f_bc);
        repeat (200) @(negedge clk_gmii);
        f_reply = make_frame(DAQ_MAC, mac1[NB-1], 300);  // reply of the last board
        f_own = make_frame(DAQ_MAC, mac1[0], 80);        // board 0's own frame
        fork
          send_engine1(NB - 1, f_reply);
          begin
            // start board 0's frame just before the reply reaches its Arbiter1
            repeat (2 * (DA_OFFSET + 8) + 10) @(negedge clk_gmii);
            send_engine1(0, f_own);
          end
        join
        repeat (500) @(negedge clk_gmii);
      end
    join

    // wait until every accepted event has reached the DAQ
    total = 0;
    for (int b = 0; b < NB; b++) total += n_acc[b];
    while (n_rx < total) begin
      @(posedge clk_sys);
      total = 0;
      for (int b = 0; b < NB; b++) total += n_acc[b];
    end
    repeat (100) @(posedge clk_sys);

    for (int b = 0; b < NB; b++) begin
      checks++;
      if (n_rx_b[b] != n_acc[b] || n_acc[b] == 0) begin failures++; $display("FAIL: board %0d: %0d of %0d events", b, n_rx_b[b], n_acc[b]); end
    end
    // frame checks
    checks++;
    if (e2_got.size() != 2 || e2_got[0] != f_sc) begin failures++; $display("FAIL: slow-control frame not delivered to the last board"); end
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (bc_seen[b] != 1) begin failures++; $display("FAIL: board %0d saw %0d broadcasts", b, bc_seen[b]); end
    end
    checks++;
    if (daq_got.size() != 1 || (daq_got[0] != f_own && daq_got[0] != f_reply)) begin
      failures++; $display("FAIL: DAQ got %0d frames; one of the colliding pair expected", daq_got.size());
    end
    // mechanisms
    checks += 10;
    if (n_own == 0)   begin failures++; $display("FAIL: no own-address frame"); end
    if (n_fwd == 0)   begin failures++; $display("FAIL: no pass-through frame"); end
    if (n_bcast == 0) begin failures++; $display("FAIL: no broadcast"); end
    if (n_drop == 0)  begin failures++; $display("FAIL: no collision drop"); end
    if (n_my == 0)    begin failures++; $display("FAIL: no MYROESTI event"); end
    if (n_nb == 0)    begin failures++; $display("FAIL: no NEIGHBOR event"); end
    if (n_ign == 0)   begin failures++; $display("FAIL: no ignored trigger"); end
    if (n_bp == 0)    begin failures++; $display("FAIL: ring buffer never paused the read-out"); end
    if (n_win == 0)   begin failures++; $display("FAIL: TCP window never closed"); end
    if (n_ack == 0)   begin failures++; $display("FAIL: no slow-control acknowledge"); end
    $display("mechanisms: own=%0d fwd=%0d bcast=%0d drop=%0d myroesti=%0d neighbor=%0d ignored=%0d ring_bp=%0d window=%0d sc_ack=%0d",
             n_own, n_fwd, n_bcast, n_drop, n_my, n_nb, n_ign, n_bp, n_win, n_ack);
    $display("events received: %0d (%0d bytes each)", n_rx, EV_BYTES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
