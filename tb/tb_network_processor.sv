// tb_network_processor: self-checking test of the network processor with
// its two clocks (125 MHz frames, 133 MHz events) running at once.
// Frames: a frame for engine 1 arriving from the DAQ side, a frame passing
// from the previous board to the DAQ side, an engine-0 frame leaving toward
// the previous board, a broadcast from the DAQ side (to engine 1 and on to
// the previous board), a frame for engine 0 from the previous board, and a
// passing frame that collides with an engine-1 frame and is dropped. Every
// frame is compared byte for byte and every status pulse is counted.
// Events: one own event and one event of the previous board, merged onto
// engine 1's TCP stream, older first, with the state sequence NEIGHBOR,
// MYROESTI and one ev_done per event.
module tb_network_processor;
  import daisy_pkg::*;
  localparam logic [47:0] MAC0 = 48'h02_00_00_00_02_00;
  localparam logic [47:0] MAC1 = 48'h02_00_00_00_02_01;
  logic clk_gmii = 0, rst_gmii = 1, clk_sys = 0, rst_sys = 1;
  gmii_t sfp0_rx, sfp0_tx, sfp1_rx, sfp1_tx, to_sitcp0, from_sitcp0, to_sitcp1, from_sitcp1;
  logic [2:0] stat_sel0, stat_sel1;
  logic [3:0] stat_arb0, stat_arb1;
  logic ring_wr_en = 0, ring_wr_ready, tcp0_rx_wr = 0, tcp0_rx_overflow, tcp1_tx_wr, tcp1_tx_full = 0, ev_done;
  logic [63:0] ring_wr_data = 0;
  logic [7:0] tcp0_rx_data = 0, tcp1_tx_data;
  logic [15:0] tcp0_rx_wc;
  tcp_arb_state_e arb_state;
  int checks = 0, failures = 0;
  typedef byte unsigned bytes_t [$];
  bytes_t got [4][$], cur [4], tcp_out;
  int n_sel0 [3], n_sel1 [3], n_arb0 [4], n_arb1 [4], n_done = 0;
  tcp_arb_state_e seq [$];

  network_processor #(.RING_DEPTH(64), .FIFO_DEPTH(256)) dut (.mac0(MAC0), .mac1(MAC1), .*);

  always #4 clk_gmii = ~clk_gmii;
  always #3.75 clk_sys = ~clk_sys;

  task automatic collect(int k, gmii_t g);
    if (g.en) cur[k].push_back(g.d);
    else if (cur[k].size() != 0) begin got[k].push_back(cur[k]); cur[k] = {}; end
  endtask
  always @(posedge clk_gmii) if (!rst_gmii) begin
    collect(0, sfp0_tx); collect(1, sfp1_tx); collect(2, to_sitcp0); collect(3, to_sitcp1);
  end
  always @(posedge clk_gmii) if (!rst_gmii) begin
    for (int i = 0; i < 3; i++) begin n_sel0[i] += int'(stat_sel0[i]); n_sel1[i] += int'(stat_sel1[i]); end
    for (int i = 0; i < 4; i++) begin n_arb0[i] += int'(stat_arb0[i]); n_arb1[i] += int'(stat_arb1[i]); end
  end
  always @(posedge clk_sys) if (!rst_sys) begin
    if (tcp1_tx_wr) tcp_out.push_back(tcp1_tx_data);
    if (ev_done) n_done++;
    if (arb_state != SUSPENSION && (seq.size() == 0 || seq[$] != arb_state)) seq.push_back(arb_state);
    if (arb_state == SUSPENSION && seq.size() != 0 && seq[$] != SUSPENSION) seq.push_back(SUSPENSION);
  end

  function automatic bytes_t make_frame(logic [47:0] da, int len);
    bytes_t f;
    for (int i = 0; i < PREAMBLE_LEN; i++) f.push_back(PREAMBLE_BYTE);
    f.push_back(SFD_BYTE);
    for (int i = 5; i >= 0; i--) f.push_back(da[8*i +: 8]);
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    return f;
  endfunction

  task automatic drive(int src, bytes_t f);
    foreach (f[i]) begin
      @(negedge clk_gmii);
      case (src)
        0: sfp0_rx = '{en: 1'b1, d: f[i]};
        1: sfp1_rx = '{en: 1'b1, d: f[i]};
        2: from_sitcp0 = '{en: 1'b1, d: f[i]};
        default: from_sitcp1 = '{en: 1'b1, d: f[i]};
      endcase
    end
    @(negedge clk_gmii);
    case (src)
      0: sfp0_rx = '0;
      1: sfp1_rx = '0;
      2: from_sitcp0 = '0;
      default: from_sitcp1 = '0;
    endcase
    repeat (MIN_IFG + 4) @(negedge clk_gmii);
  endtask

  initial begin
    repeat (20000) @(posedge clk_sys);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t f_sc, f_pass, f_e0, f_bc, f_own0, f_e1, f_pass2, exp_tcp;
    logic [63:0] own [$];
    ev_header_t h;
    sfp0_rx = '0; sfp1_rx = '0; from_sitcp0 = '0; from_sitcp1 = '0;
    repeat (3) @(posedge clk_sys);
    rst_gmii = 0; rst_sys = 0;
    f_sc = make_frame(MAC1, 50);
    f_pass = make_frame(48'h0200_0000_0F0F, 60);
    f_e0 = make_frame(48'h0200_0000_0303, 46);
    f_bc = make_frame(BCAST_MAC, 46);
    f_own0 = make_frame(MAC0, 70);
    f_e1 = make_frame(48'h0200_0000_0404, 90);
    f_pass2 = make_frame(48'h0200_0000_0505, 50);
    for (int i = 0; i < 4; i++) begin n_arb0[i] = 0; n_arb1[i] = 0; end
    for (int i = 0; i < 3; i++) begin n_sel0[i] = 0; n_sel1[i] = 0; end
    fork
      begin
        drive(1, f_sc); drive(0, f_pass); drive(2, f_e0); drive(1, f_bc); drive(0, f_own0);
        // engine 1 starts first; the passing frame reaches Arbiter1 15
        // clocks after it enters, while the engine frame is still going
        fork
          drive(3, f_e1);
          begin repeat (3) @(negedge clk_gmii); drive(0, f_pass2); end
        join
      end
      begin
        // previous board's event 4 (2 words), then own event 5 (3 words)
        h = '{evnum: 4, board_id: 16'h0002, nwords: 16'd2};
        for (int i = 7; i >= 0; i--) exp_tcp.push_back(h[8*i +: 8]);
        for (int i = 0; i < 16; i++) exp_tcp.push_back(8'(i + 1));
        foreach (exp_tcp[i]) begin
          @(negedge clk_sys) tcp0_rx_wr = 1; tcp0_rx_data = exp_tcp[i];
        end
        @(negedge clk_sys) tcp0_rx_wr = 0;
        repeat (40) @(negedge clk_sys);
        own = '{{32'd5, 16'h0001, 16'd3}, 64'h1111_2222_3333_4444, 64'h5555_6666_7777_8888, 64'h99AA_BBCC_DDEE_FF00};
        foreach (own[i]) begin
          @(negedge clk_sys) ring_wr_en = 1; ring_wr_data = own[i];
          for (int k = 7; k >= 0; k--) exp_tcp.push_back(own[i][8*k +: 8]);
        end
        @(negedge clk_sys) ring_wr_en = 0;
      end
    join
    repeat (100) @(posedge clk_sys);
    checks += 4;
    if (got[3].size() != 2 || got[3][0] != f_sc || got[3][1] != f_bc) begin failures++; $display("FAIL: frames for engine 1"); end
    if (got[1].size() != 2 || got[1][0] != f_pass || got[1][1] != f_e1) begin failures++; $display("FAIL: frames toward the DAQ side (%0d)", got[1].size()); end
    if (got[0].size() != 2 || got[0][0] != f_e0 || got[0][1] != f_bc) begin failures++; $display("FAIL: frames toward the previous board"); end
    if (got[2].size() != 1 || got[2][0] != f_own0) begin failures++; $display("FAIL: frame for engine 0"); end
    // status pulses: Selector0 saw pass, own0, pass2; Selector1 saw sc, bc
    checks += 4;
    if (n_sel0[2] != 1 || n_sel0[1] != 0 || n_sel0[0] != 2) begin failures++; $display("FAIL: Selector0 own/bcast/fwd %0d/%0d/%0d", n_sel0[2], n_sel0[1], n_sel0[0]); end
    if (n_sel1[2] != 1 || n_sel1[1] != 1 || n_sel1[0] != 0) begin failures++; $display("FAIL: Selector1 own/bcast/fwd %0d/%0d/%0d", n_sel1[2], n_sel1[1], n_sel1[0]); end
    if (n_arb0[3] != 1 || n_arb0[2] != 1 || n_arb0[1] != 0 || n_arb0[0] != 0) begin failures++; $display("FAIL: Arbiter0 counts"); end
    if (n_arb1[3] != 1 || n_arb1[2] != 1 || n_arb1[1] != 1 || n_arb1[0] != 0) begin failures++; $display("FAIL: Arbiter1 sent/dropped %0d %0d %0d %0d", n_arb1[3], n_arb1[2], n_arb1[1], n_arb1[0]); end
    checks += 2;
    if (n_done != 2) begin failures++; $display("FAIL: %0d ev_done pulses", n_done); end
    if (seq.size() != 4 || seq[0] != NEIGHBOR || seq[1] != SUSPENSION || seq[2] != MYROESTI || seq[3] != SUSPENSION) begin
      failures++; $display("FAIL: state sequence of %0d entries", seq.size());
    end
    checks++;
    if (tcp_out != exp_tcp) begin failures++; $display("FAIL: TCP stream (%0d bytes, expected %0d)", tcp_out.size(), exp_tcp.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
