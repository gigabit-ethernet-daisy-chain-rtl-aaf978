// tb_data_if: self-checking test of the event builder.
// A digitizer model delivers a counting sample sequence whenever adc_ready
// is high (with random gaps); a ring-buffer model accepts words with random
// back-pressure. The test checks header words (event number, board ID,
// length), the packing of four samples per payload word, that a trigger
// arriving while an event is built is ignored and flagged, and that the
// read-out pauses while the ring buffer is full.
module tb_data_if;
  import daisy_pkg::*;
  localparam int PW = 5;
  logic clk = 0, rst = 1;
  logic trig = 0;
  logic [EVNUM_W-1:0] evnum = 0;
  logic [15:0] board_id = 16'h0B0D;
  logic adc_start, adc_valid = 0, adc_ready;
  logic [15:0] adc_data = 0;
  logic wr_en, wr_ready = 1, busy, trig_ignored;
  logic [63:0] wr_data;
  int checks = 0, failures = 0;
  int ignored = 0, starts = 0, stalls = 0;
  logic [63:0] got [$];
  logic [15:0] sample = 0;
  bit bp = 0;

  data_if #(.PAYLOAD_WORDS(PW)) dut (.*);

  always #5 clk = ~clk;

  // digitizer: next sample of a counter, offered with random gaps
  always @(posedge clk) begin
    if (adc_valid && adc_ready) sample <= sample + 1;
    if (adc_valid && !adc_ready && !rst && busy) stalls++;
  end
  always @(negedge clk) begin
    adc_valid = ($urandom_range(0, 3) != 0);
    adc_data  = sample;
    wr_ready  = bp ? ($urandom_range(0, 3) == 0) : 1'b1;
  end
  always @(posedge clk) begin
    if (wr_en && wr_ready) got.push_back(wr_data);
    if (!rst && trig_ignored) ignored++;
    if (!rst && adc_start) starts++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input logic [EVNUM_W-1:0] n);
    @(negedge clk); trig = 1; evnum = n;
    @(negedge clk); trig = 0;
  endtask

  initial begin
    logic [15:0] s;
    int nev;
    repeat (3) @(posedge clk);
    rst <= 0;
    s = 0;
    nev = 0;
    for (int e = 0; e < 6; e++) begin
      bp = (e >= 3);
      pulse(EVNUM_W'(100 + e));
      if (e == 1) begin
        repeat (3) @(negedge clk);
        pulse(EVNUM_W'(999));           // arrives while busy: ignored
      end
      wait (!busy);
      repeat (2) @(posedge clk);
      nev++;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (got.size() != nev * (PW + 1)) begin
      failures++; $display("FAIL: %0d words written, expected %0d", got.size(), nev * (PW + 1));
    end
    for (int e = 0; e < nev && got.size() >= PW + 1; e++) begin
      logic [63:0] h;
      h = got.pop_front();
      checks++;
      if (h !== {32'(100 + e), 16'h0B0D, 16'(PW)}) begin
        failures++; $display("FAIL: header %0d = %h", e, h);
      end
      for (int w = 0; w < PW; w++) begin
        logic [63:0] x;
        x = got.pop_front();
        checks++;
        if (x !== {s, s + 16'd1, s + 16'd2, s + 16'd3}) begin
          failures++; $display("FAIL: ev %0d word %0d = %h", e, w, x);
        end
        s = s + 16'd4;
      end
    end
    checks++;
    if (ignored != 1) begin failures++; $display("FAIL: %0d ignored triggers", ignored); end
    checks++;
    if (starts != nev) begin failures++; $display("FAIL: %0d read-out starts", starts); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: read-out never paused by back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
