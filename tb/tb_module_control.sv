// tb_module_control: self-checking test of the slow-control register block.
// Writes random values to every register through the request/acknowledge
// bus, reads them back, checks the one-clock acknowledge, the board ID
// output, the register outputs and accesses outside the register map.
module tb_module_control;
  localparam int NREG = 16;
  logic clk = 0, rst = 1;
  logic sc_we = 0, sc_re = 0;
  logic [31:0] sc_addr = 0;
  logic [7:0] sc_wd = 0;
  logic sc_ack;
  logic [7:0] sc_rd;
  logic [7:0] regs [NREG];
  logic [15:0] board_id;
  logic [7:0] model [NREG];
  int checks = 0, failures = 0;

  module_control #(.NREG(NREG)) dut (.*);

  always #5 clk = ~clk;

  task automatic access(input bit we, input logic [31:0] a, input logic [7:0] d, output logic [7:0] rd);
    @(negedge clk);
    sc_we = we; sc_re = !we; sc_addr = a; sc_wd = d;
    @(negedge clk);
    sc_we = 0; sc_re = 0;
    checks++;
    if (!sc_ack) begin failures++; $display("FAIL: no ack one clock after request"); end
    rd = sc_rd;
    @(negedge clk);
    checks++;
    if (sc_ack) begin failures++; $display("FAIL: ack longer than one clock"); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] rd;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < NREG; i++) begin
      access(1'b0, 32'(i), 8'h00, rd);
      checks++;
      if (rd !== 8'h00) begin failures++; $display("FAIL: reg %0d not reset", i); end
    end
    for (int i = 0; i < NREG; i++) begin
      model[i] = 8'($urandom);
      access(1'b1, 32'(i), model[i], rd);
    end
    for (int i = NREG - 1; i >= 0; i--) begin
      access(1'b0, 32'(i), 8'h00, rd);
      checks++;
      if (rd !== model[i]) begin failures++; $display("FAIL: reg %0d read %h exp %h", i, rd, model[i]); end
      checks++;
      if (regs[i] !== model[i]) begin failures++; $display("FAIL: regs[%0d] output", i); end
    end
    checks++;
    if (board_id !== {model[0], model[1]}) begin failures++; $display("FAIL: board_id %h", board_id); end
    // outside the map: acknowledged, ignored, reads 0
    access(1'b1, 32'h100, 8'hA5, rd);
    access(1'b0, 32'h100, 8'h00, rd);
    checks++;
    if (rd !== 8'h00) begin failures++; $display("FAIL: unmapped read %h", rd); end
    for (int i = 0; i < NREG; i++) begin
      checks++;
      if (regs[i] !== model[i]) begin failures++; $display("FAIL: unmapped write changed reg %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
