// tb_path_controller: self-checking test of the frame routing of one board.
// Frames enter from both SFP ports and both engines with random addresses
// (own engine, the other engine, broadcast, foreign). The expected frames
// on each of the four outputs follow the routing rule: a port-0 frame for
// engine 0 goes to engine 0, any other port-0 frame leaves by port 1
// (broadcast: both), mirrored for port 1, engine frames leave by their own
// port. A deliberate collision in Arbiter1 (engine-1 frame first, a
// passing frame from port 0 during it) must drop the passing frame.
module tb_path_controller;
  import daisy_pkg::*;
  localparam logic [47:0] MAC0 = 48'h02_00_00_00_01_00;
  localparam logic [47:0] MAC1 = 48'h02_00_00_00_01_01;
  logic clk = 0, rst = 1;
  gmii_t sfp0_rx, sfp0_tx, sfp1_rx, sfp1_tx, to_sitcp0, from_sitcp0, to_sitcp1, from_sitcp1;
  logic [2:0] stat_sel0, stat_sel1;
  logic [3:0] stat_arb0, stat_arb1;
  int checks = 0, failures = 0;
  int drops1 = 0;
  typedef byte unsigned frame_t [$];
  frame_t exp_q [4][$], got_q [4][$], cur [4];   // 0 sfp0_tx, 1 sfp1_tx, 2 to_sitcp0, 3 to_sitcp1

  path_controller dut (.clk, .rst, .mac0(MAC0), .mac1(MAC1), .*);

  always #4 clk = ~clk;

  function automatic frame_t make_frame(logic [47:0] da, int len);
    frame_t f;
    for (int i = 0; i < PREAMBLE_LEN; i++) f.push_back(PREAMBLE_BYTE);
    f.push_back(SFD_BYTE);
    for (int i = 5; i >= 0; i--) f.push_back(da[8*i +: 8]);
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    return f;
  endfunction

  task automatic drive(int src, frame_t f, int delay);
    repeat (delay) @(negedge clk);
    foreach (f[i]) begin
      @(negedge clk);
      case (src)
        0: sfp0_rx = '{en: 1'b1, d: f[i]};
        1: sfp1_rx = '{en: 1'b1, d: f[i]};
        2: from_sitcp0 = '{en: 1'b1, d: f[i]};
        default: from_sitcp1 = '{en: 1'b1, d: f[i]};
      endcase
    end
    @(negedge clk);
    case (src)
      0: sfp0_rx = '0;
      1: sfp1_rx = '0;
      2: from_sitcp0 = '0;
      default: from_sitcp1 = '0;
    endcase
  endtask

  task automatic collect(int k, gmii_t g);
    if (g.en) cur[k].push_back(g.d);
    else if (cur[k].size() != 0) begin got_q[k].push_back(cur[k]); cur[k] = {}; end
  endtask

  always @(posedge clk) if (!rst) begin
    collect(0, sfp0_tx); collect(1, sfp1_tx); collect(2, to_sitcp0); collect(3, to_sitcp1);
    drops1 += int'(stat_arb1[1]);
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sfp0_rx = '0; sfp1_rx = '0; from_sitcp0 = '0; from_sitcp1 = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 80; n++) begin
      int src, k;
      logic [47:0] da;
      frame_t f;
      src = $urandom_range(0, 3);
      k = $urandom_range(0, 3);
      da = (k == 0) ? MAC0 : (k == 1) ? MAC1 : (k == 2) ? BCAST_MAC : {16'h0200, $urandom};
      f = make_frame(da, 46 + $urandom_range(0, 20));
      case (src)
        0: begin
          if (da == MAC0 || da == BCAST_MAC) exp_q[2].push_back(f);
          if (da != MAC0) exp_q[1].push_back(f);
        end
        1: begin
          if (da == MAC1 || da == BCAST_MAC) exp_q[3].push_back(f);
          if (da != MAC1) exp_q[0].push_back(f);
        end
        2: exp_q[0].push_back(f);
        default: exp_q[1].push_back(f);
      endcase
      drive(src, f, 0);
      repeat (DA_OFFSET + 7 + MIN_IFG + 2) @(negedge clk);
    end
    // traffic in both directions at once, no shared arbiter
    begin
      frame_t fa, fb;
      fa = make_frame(48'h0200_1234_5678, 60);
      fb = make_frame(48'h0200_8765_4321, 60);
      exp_q[1].push_back(fa);
      exp_q[0].push_back(fb);
      fork drive(0, fa, 0); drive(1, fb, 3); join
      repeat (40) @(negedge clk);
    end
    // collision in Arbiter1: engine-1 frame first, passing frame during it
    begin
      frame_t fa, fb;
      fa = make_frame(48'h0200_0000_00AA, 100);
      fb = make_frame(48'h0200_0000_00BB, 60);
      exp_q[1].push_back(fa);
      fork drive(3, fa, 0); drive(0, fb, 10); join
      repeat (40) @(negedge clk);
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (got_q[k].size() != exp_q[k].size()) begin
        failures++; $display("FAIL: output %0d has %0d frames, expected %0d", k, got_q[k].size(), exp_q[k].size());
      end
      while (got_q[k].size() != 0 && exp_q[k].size() != 0) begin
        checks++;
        if (got_q[k].pop_front() != exp_q[k].pop_front()) begin failures++; $display("FAIL: output %0d frame differs", k); end
      end
    end
    checks++;
    if (drops1 != 1) begin failures++; $display("FAIL: %0d drops in Arbiter1", drops1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
