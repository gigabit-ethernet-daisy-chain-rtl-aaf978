// module_control: executes the slow-control requests of the DAQ PC.
//
// The TCP/IP engine facing the DAQ PC unpacks each slow-control UDP request
// into an address with a write or read strobe and hands it to this block,
// which carries it out and answers with an acknowledge (and the read data),
// which the engine returns to the DAQ PC. That request/acknowledge exchange
// is the source's; the register map is this design's: NREG byte-wide
// registers at addresses 0..NREG-1 that hold the board's settings and read
// back what was written. Registers 0 and 1 hold the 16-bit board ID that
// the Data I/F puts into every event header (register 0 is the high byte);
// the rest drive the settings of the front-end chips through regs.
// An address outside the map is acknowledged, ignored on write and reads 0.
//
// Timing: sc_ack pulses one clock after sc_we or sc_re, with sc_rd valid in
// the same cycle. A write takes effect on that clock.
module module_control #(
  parameter int NREG = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        sc_we,
  input  logic        sc_re,
  input  logic [31:0] sc_addr,
  input  logic [7:0]  sc_wd,
  output logic        sc_ack,
  output logic [7:0]  sc_rd,
  output logic [7:0]  regs [NREG],
  output logic [15:0] board_id
);
  logic in_map;
  assign in_map   = (sc_addr < 32'(NREG));
  assign board_id = {regs[0], regs[1]};

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      sc_ack <= 1'b0;
      sc_rd  <= '0;
    end else begin
      sc_ack <= sc_we || sc_re;
      sc_rd  <= '0;
      if (sc_we && in_map) regs[sc_addr[$clog2(NREG)-1:0]] <= sc_wd;
      if (sc_re && in_map) sc_rd <= regs[sc_addr[$clog2(NREG)-1:0]];
    end
  end

  a_one_strobe: assert property (@(posedge clk) disable iff (rst) !(sc_we && sc_re));
endmodule
