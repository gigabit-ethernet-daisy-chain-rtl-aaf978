// tb_rx_fifo: self-checking test of the receive FIFO, run with a small
// depth. A sender model writes a byte stream of events (8 header bytes,
// most significant first, then nwords*8 payload bytes) and, like a TCP
// sender obeying the advertised window, writes only while wc shows free
// space. A reader checks every header on head and every payload byte.
// At the end the sender ignores the window once, and the overflow flag
// must rise.
module tb_rx_fifo;
  import daisy_pkg::*;
  localparam int DEPTH = 64;
  localparam int NEV = 50;
  logic clk = 0, rst = 1;
  logic wr_en = 0, overflow, head_valid, head_pop = 0, rd_en = 0, rd_ok, rd_valid;
  logic [7:0] wr_data = 0, rd_data;
  logic [$clog2(DEPTH):0] wc;
  ev_header_t head;
  int checks = 0, failures = 0, window_stalls = 0, max_wc = 0;
  ev_header_t exp_h [$];
  logic [7:0] exp_b [$];
  bit writer_done = 0;

  rx_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #4 clk = ~clk;
  always @(posedge clk) if (!rst && int'(wc) > max_wc) max_wc = int'(wc);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(logic [7:0] b);
    @(negedge clk);
    while ($urandom_range(0, 4) == 0 || int'(wc) >= DEPTH - 1) begin
      if (int'(wc) >= DEPTH - 1) window_stalls++;
      wr_en = 0; @(negedge clk);
    end
    wr_en = 1; wr_data = b;
    @(negedge clk) wr_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < NEV; e++) begin
      int n;
      ev_header_t h;
      n = (e % 9 == 4) ? 20 : $urandom_range(0, 3);
      h = '{evnum: $urandom, board_id: 16'(e), nwords: 16'(n)};
      exp_h.push_back(h);
      for (int i = 7; i >= 0; i--) put(h[8*i +: 8]);
      for (int i = 0; i < n * 8; i++) begin
        logic [7:0] b;
        b = 8'($urandom);
        exp_b.push_back(b);
        put(b);
      end
    end
    writer_done = 1;
  end

  initial begin
    wait (!rst);
    for (int e = 0; e < NEV; e++) begin
      ev_header_t h;
      int n, recv;
      @(negedge clk);
      while (!head_valid) @(negedge clk);
      if (e % 6 == 2) repeat (150) @(negedge clk);   // slow reader: FIFO fills
      h = exp_h.pop_front();
      checks++;
      if (head !== h) begin failures++; $display("FAIL: event %0d head %h exp %h", e, head, h); end
      n = int'(head.nwords) * 8;
      head_pop = 1;
      @(negedge clk);
      head_pop = 0;
      recv = 0;
      while (recv < n) begin
        rd_en = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        #1;
        if (rd_valid) begin
          logic [7:0] b;
          b = exp_b.pop_front();
          checks++;
          if (rd_data !== b) begin failures++; $display("FAIL: event %0d byte %0d %h exp %h", e, recv, rd_data, b); end
          recv++;
        end
        @(negedge clk);
      end
      rd_en = 0;
    end
    repeat (5) @(posedge clk);
    checks += 4;
    if (!writer_done || exp_b.size() != 0) begin failures++; $display("FAIL: bytes left"); end
    if (window_stalls == 0) begin failures++; $display("FAIL: FIFO never filled"); end
    if (wc != 0 || head_valid) begin failures++; $display("FAIL: not empty at end"); end
    if (overflow) begin failures++; $display("FAIL: overflow while the window was obeyed"); end
    // ignore the window: a long event fills the FIFO and one byte more overflows
    for (int i = 0; i < DEPTH + 16; i++) begin
      @(negedge clk) wr_en = 1; wr_data = (i == 7) ? 8'd100 : 8'd0;
    end
    @(negedge clk) wr_en = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("FAIL: overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
