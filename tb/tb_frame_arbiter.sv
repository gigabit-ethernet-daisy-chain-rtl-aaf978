// tb_frame_arbiter: self-checking test of the collision rule of the
// frame Arbiter. Pairs of frames are started on the two inputs with a
// chosen offset: no overlap, overlap with either input first, a tie, and a
// second frame that starts inside or just after the inter-frame gap.
// A reference model decides which frames must come out; the test compares
// the output frames byte for byte, the one-clock latency, the minimum gap
// between output frames and the drop/sent pulse counts.
module tb_frame_arbiter;
  import daisy_pkg::*;
  logic clk = 0, rst = 1;
  gmii_t in_sel, in_sitcp, tx;
  logic sent_sel, sent_sitcp, drop_sel, drop_sitcp;
  int checks = 0, failures = 0, cyc = 0;
  int n_ss = 0, n_st = 0, n_ds = 0, n_dt = 0;
  int e_ss = 0, e_st = 0, e_ds = 0, e_dt = 0;
  typedef byte unsigned frame_t [$];
  frame_t exp_q [$], got_q [$], cur;
  int idle_run = 100, min_gap = 1000;

  frame_arbiter dut (.*);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic frame_t make_frame(int len);
    frame_t f;
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    return f;
  endfunction

  task automatic drive(bit which, frame_t f, int delay);
    repeat (delay) @(negedge clk);
    foreach (f[i]) begin
      @(negedge clk);
      if (which) in_sitcp = '{en: 1'b1, d: f[i]};
      else       in_sel   = '{en: 1'b1, d: f[i]};
    end
    @(negedge clk);
    if (which) in_sitcp = '0; else in_sel = '0;
  endtask

  always @(posedge clk) if (!rst) begin
    if (tx.en) begin
      if (cur.size() == 0 && idle_run < min_gap) min_gap = idle_run;
      cur.push_back(tx.d);
      idle_run = 0;
    end else begin
      if (cur.size() != 0) begin got_q.push_back(cur); cur = {}; end
      idle_run++;
    end
    n_ss += int'(sent_sel); n_st += int'(sent_sitcp);
    n_ds += int'(drop_sel); n_dt += int'(drop_sitcp);
  end

  // latency: tx equals the granted input one clock earlier
  gmii_t d_sel, d_sitcp;
  always @(posedge clk) begin d_sel <= in_sel; d_sitcp <= in_sitcp; end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one pair: frame A on input first_in at time 0, frame B on the other
  // input at offset off (off may be negative: B first)
  task automatic pair(bit a_in, int la, int lb, int off);
    frame_t fa, fb;
    int ta, tb_;
    fa = make_frame(la);
    fb = make_frame(lb);
    ta = (off < 0) ? -off : 0;
    tb_ = (off < 0) ? 0 : off;
    // reference: the first frame to start wins; B is kept only if it starts
    // after A has ended plus the gap; on a tie the engine input wins
    if (ta < tb_) begin
      exp_q.push_back(fa);
      if (tb_ >= ta + la + MIN_IFG) exp_q.push_back(fb);
      else begin if (a_in) e_ds++; else e_dt++; end
      if (a_in) begin e_st++; if (tb_ >= ta + la + MIN_IFG) e_ss++; end
      else begin e_ss++; if (tb_ >= ta + la + MIN_IFG) e_st++; end
    end else if (tb_ < ta) begin
      exp_q.push_back(fb);
      if (ta >= tb_ + lb + MIN_IFG) exp_q.push_back(fa);
      else begin if (a_in) e_dt++; else e_ds++; end
      if (a_in) begin e_ss++; if (ta >= tb_ + lb + MIN_IFG) e_st++; end
      else begin e_st++; if (ta >= tb_ + lb + MIN_IFG) e_ss++; end
    end else begin
      exp_q.push_back(a_in ? fa : fb);
      e_st++; e_ds++;
    end
    fork
      drive(a_in, fa, ta);
      drive(!a_in, fb, tb_);
    join
    repeat (MIN_IFG + 3) @(negedge clk);
  endtask

  initial begin
    in_sel = '0; in_sitcp = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    pair(1, 70, 70, 0);              // tie: engine wins
    pair(0, 70, 70, 0);
    pair(1, 80, 64, 5);              // engine first, selector collides
    pair(0, 80, 64, 5);              // selector first, engine collides
    pair(1, 64, 64, 64 + MIN_IFG - 1);  // starts one clock too early
    pair(1, 64, 64, 64 + MIN_IFG);      // starts right after the gap
    pair(0, 64, 64, -30);
    pair(0, 64, 64, 64);             // back to back: inside the gap
    for (int i = 0; i < 40; i++)
      pair(1'($urandom), 64 + $urandom_range(0, 30), 64 + $urandom_range(0, 30),
           $urandom_range(0, 200) - 100);
    repeat (10) @(posedge clk);
    checks++;
    if (got_q.size() != exp_q.size()) begin
      failures++; $display("FAIL: %0d frames out, expected %0d", got_q.size(), exp_q.size());
    end
    while (got_q.size() != 0 && exp_q.size() != 0) begin
      checks++;
      if (got_q.pop_front() != exp_q.pop_front()) begin failures++; $display("FAIL: output frame differs"); end
    end
    checks += 5;
    if (n_ss != e_ss || n_st != e_st) begin failures++; $display("FAIL: sent %0d/%0d %0d/%0d", n_ss, e_ss, n_st, e_st); end
    if (n_ds != e_ds) begin failures++; $display("FAIL: drop_sel %0d exp %0d", n_ds, e_ds); end
    if (n_dt != e_dt) begin failures++; $display("FAIL: drop_sitcp %0d exp %0d", n_dt, e_dt); end
    if (min_gap < MIN_IFG) begin failures++; $display("FAIL: output gap %0d", min_gap); end
    if (e_ds == 0 || e_dt == 0) begin failures++; $display("FAIL: no collision exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency check on every output byte
  always @(posedge clk) if (!rst && tx.en) begin
    checks++;
    if (!((d_sel.en && tx == d_sel) || (d_sitcp.en && tx == d_sitcp))) begin
      failures++; $display("FAIL: output byte not the input of the previous clock");
    end
  end
endmodule
