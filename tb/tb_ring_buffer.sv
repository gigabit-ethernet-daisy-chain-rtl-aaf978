// tb_ring_buffer: self-checking test of the own-event ring buffer, run with
// a small depth so that it fills and wraps. A writer stores events of random
// length (some longer than the whole buffer) with random pauses, honouring
// wr_ready; a reader takes each event's header from head, pops it and reads
// the payload with random pauses. Checks headers, every payload word, the
// read latency of one clock, that the writer was held off, and that an
// event longer than the buffer streams through.
module tb_ring_buffer;
  import daisy_pkg::*;
  localparam int DEPTH = 32;
  localparam int NEV = 60;
  logic clk = 0, rst = 1;
  logic wr_en = 0, wr_ready, head_valid, head_pop = 0, rd_en = 0, rd_ok, rd_valid;
  logic [63:0] wr_data = 0, rd_data;
  logic [$clog2(DEPTH):0] used;
  ev_header_t head;
  int checks = 0, failures = 0, held = 0, max_len = 0;
  logic [63:0] exp_q [$];
  bit writer_done = 0;

  ring_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #4 clk = ~clk;
  always @(posedge clk) if (!rst && wr_en && !wr_ready) held++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(logic [63:0] w);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin wr_en = 0; @(negedge clk); end
    wr_en = 1; wr_data = w;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    @(negedge clk) wr_en = 0;
  endtask

  // writer
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < NEV; e++) begin
      int n;
      ev_header_t h;
      n = (e % 10 == 5) ? DEPTH * 3 : $urandom_range(0, 12);
      if (n > max_len) max_len = n;
      h = '{evnum: EVNUM_W'(e * 3), board_id: 16'h00B1, nwords: 16'(n)};
      exp_q.push_back(h);
      put(h);
      for (int i = 0; i < n; i++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};
        exp_q.push_back(w);
        put(w);
      end
    end
    writer_done = 1;
  end

  // reader
  logic [63:0] got;
  int pend = 0;
  initial begin
    head_pop = 0; rd_en = 0;
    wait (!rst);
    for (int e = 0; e < NEV; e++) begin
      logic [63:0] h;
      int n, recv;
      @(negedge clk);
      while (!head_valid) @(negedge clk);
      if (e % 7 == 3) repeat (80) @(negedge clk);   // slow reader: buffer fills
      h = exp_q.pop_front();
      checks++;
      if (head !== h) begin failures++; $display("FAIL: event %0d head %h exp %h", e, head, h); end
      n = int'(head.nwords);
      head_pop = 1;
      @(negedge clk);
      head_pop = 0;
      recv = 0;
      while (recv < n) begin
        rd_en = ($urandom_range(0, 2) != 0);
        @(posedge clk);
        #1;
        if (rd_valid) begin
          logic [63:0] w;
          w = exp_q.pop_front();
          checks++;
          if (rd_data !== w) begin failures++; $display("FAIL: event %0d word %0d %h exp %h", e, recv, rd_data, w); end
          recv++;
        end
        @(negedge clk);
      end
      rd_en = 0;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (!writer_done || exp_q.size() != 0) begin failures++; $display("FAIL: %0d words left", exp_q.size()); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL: writer never held off"); end
    checks++;
    if (max_len <= DEPTH) begin failures++; $display("FAIL: no event longer than the buffer"); end
    checks++;
    if (used != 0 || head_valid) begin failures++; $display("FAIL: buffer not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
