// tb_trigger_if: self-checking test of the trigger interface.
// Drives asynchronous-looking trigger pulses of varying width and spacing
// and checks that each rising edge gives exactly one trig pulse three clocks
// later, carrying event numbers 0, 1, 2, ... in order.
module tb_trigger_if;
  import daisy_pkg::*;
  logic clk = 0, rst = 1, trig_in = 0;
  logic trig;
  logic [EVNUM_W-1:0] evnum;
  int checks = 0, failures = 0;
  int edges = 0, pulses = 0;
  int edge_cycle [$];
  int cyc = 0;

  trigger_if dut (.clk, .rst, .trig_in, .trig, .evnum);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (!rst && trig) begin
    int c;
    checks++;
    if (evnum !== EVNUM_W'(pulses)) begin
      failures++; $display("FAIL: pulse %0d evnum %0d", pulses, evnum);
    end
    checks++;
    c = edge_cycle.pop_front();
    if (cyc - c != 3) begin
      failures++; $display("FAIL: latency %0d", cyc - c);
    end
    pulses++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      int w, g;
      w = 1 + $urandom_range(0, 6);
      g = 1 + $urandom_range(0, 8);
      @(negedge clk) trig_in = 1;
      edge_cycle.push_back(cyc);   // value cyc holds at the sampling edge
      edges++;
      repeat (w) @(negedge clk);
      trig_in = 0;
      repeat (g) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (pulses != edges) begin
      failures++; $display("FAIL: %0d pulses for %0d edges", pulses, edges);
    end
    // reset clears the counter
    rst <= 1; @(posedge clk); rst <= 0;
    pulses = 0;
    @(negedge clk) trig_in = 1; edge_cycle.push_back(cyc);
    repeat (3) @(negedge clk); trig_in = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (pulses != 1) begin failures++; $display("FAIL: after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
