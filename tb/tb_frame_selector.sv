// tb_frame_selector: self-checking test of the destination-MAC router.
// Sends frames addressed to the local engine, to the broadcast address and
// to other stations (including addresses that differ from the local one in
// a single byte), back to back with the minimum inter-frame gap. Checks
// that each output receives exactly the frames it should, byte for byte,
// that the delay is DA_OFFSET+7 clocks, and the per-frame pulses.
module tb_frame_selector;
  import daisy_pkg::*;
  localparam logic [47:0] OWN = 48'h02_00_00_00_00_03;
  localparam int LAT = DA_OFFSET + 7;
  logic clk = 0, rst = 1;
  gmii_t rx, to_sitcp, to_arb;
  logic is_own, is_bcast, is_fwd;
  int checks = 0, failures = 0, cyc = 0;
  int n_own = 0, n_bcast = 0, n_fwd = 0;
  typedef byte unsigned frame_t [$];
  frame_t exp_s [$], exp_a [$], got_s [$], got_a [$];
  frame_t cur_s, cur_a;
  int start_cyc [$];
  int first_s [$], first_a [$];

  frame_selector dut (.clk, .rst, .own_mac(OWN), .rx, .to_sitcp, .to_arb, .is_own, .is_bcast, .is_fwd);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic frame_t make_frame(logic [47:0] da, int len);
    frame_t f;
    for (int i = 0; i < PREAMBLE_LEN; i++) f.push_back(PREAMBLE_BYTE);
    f.push_back(SFD_BYTE);
    for (int i = 5; i >= 0; i--) f.push_back(da[8*i +: 8]);
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    return f;
  endfunction

  task automatic send(frame_t f, int gap);
    foreach (f[i]) begin
      @(negedge clk);
      if (i == 0) start_cyc.push_back(cyc);
      rx = '{en: 1'b1, d: f[i]};
    end
    @(negedge clk);
    rx = '0;
    repeat (gap - 1) @(negedge clk);
  endtask

  always @(posedge clk) if (!rst) begin
    if (to_sitcp.en) begin
      if (cur_s.size() == 0) first_s.push_back(cyc);
      cur_s.push_back(to_sitcp.d);
    end else if (cur_s.size() != 0) begin got_s.push_back(cur_s); cur_s = {}; end
    if (to_arb.en) begin
      if (cur_a.size() == 0) first_a.push_back(cyc);
      cur_a.push_back(to_arb.d);
    end else if (cur_a.size() != 0) begin got_a.push_back(cur_a); cur_a = {}; end
    n_own += int'(is_own); n_bcast += int'(is_bcast); n_fwd += int'(is_fwd);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_own = 0, e_b = 0, e_f = 0;
    rx = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      logic [47:0] da;
      frame_t f;
      int kind;
      kind = $urandom_range(0, 3);
      case (kind)
        0: da = OWN;
        1: da = BCAST_MAC;
        2: begin da = OWN; da[8*$urandom_range(0, 5) +: 8] ^= 8'(1 << $urandom_range(0, 7)); end
        default: da = {$urandom, 16'($urandom)};
      endcase
      if (da == BCAST_MAC && kind != 1) da = OWN ^ 48'h1;
      f = make_frame(da, 46 + $urandom_range(0, 40));
      if (da == OWN) begin exp_s.push_back(f); e_own++; end
      else if (da == BCAST_MAC) begin exp_s.push_back(f); exp_a.push_back(f); e_b++; end
      else begin exp_a.push_back(f); e_f++; end
      send(f, MIN_IFG + $urandom_range(0, 3));
    end
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (got_s.size() != exp_s.size() || got_a.size() != exp_a.size()) begin
      failures++; $display("FAIL: frame counts sitcp %0d/%0d arb %0d/%0d", got_s.size(), exp_s.size(), got_a.size(), exp_a.size());
    end
    while (got_s.size() != 0 && exp_s.size() != 0) begin
      checks++;
      if (got_s.pop_front() != exp_s.pop_front()) begin failures++; $display("FAIL: frame to engine differs"); end
    end
    while (got_a.size() != 0 && exp_a.size() != 0) begin
      checks++;
      if (got_a.pop_front() != exp_a.pop_front()) begin failures++; $display("FAIL: frame to arbiter differs"); end
    end
    checks += 3;
    if (n_own != e_own) begin failures++; $display("FAIL: is_own %0d/%0d", n_own, e_own); end
    if (n_bcast != e_b) begin failures++; $display("FAIL: is_bcast %0d/%0d", n_bcast, e_b); end
    if (n_fwd != e_f) begin failures++; $display("FAIL: is_fwd %0d/%0d", n_fwd, e_f); end
    // every frame leaves on at least one output LAT clocks after entering
    foreach (start_cyc[i]) begin
      int t;
      t = start_cyc[i] + LAT;
      checks++;
      if (!((first_s.size() != 0 && first_s[0] == t) || (first_a.size() != 0 && first_a[0] == t))) begin
        failures++; $display("FAIL: frame %0d latency", i);
      end
      if (first_s.size() != 0 && first_s[0] == t) void'(first_s.pop_front());
      if (first_a.size() != 0 && first_a[0] == t) void'(first_a.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
