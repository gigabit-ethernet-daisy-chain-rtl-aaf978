// trigger_if: receives the trigger from the board's trigger connector and
// numbers the events.
//
// The trigger input is asynchronous to the 133 MHz system clock, so it is
// passed through a two-flop synchronizer and its rising edge is turned into
// a one-clock pulse, trig. Every trigger edge increments the event number
// by one, as the source describes; evnum shows the number that belongs to
// the pulse in the same cycle (the first trigger after reset is event 0).
// Every edge is counted, also the ones the Data I/F ignores while busy, so
// boards fed by the same trigger keep the same numbering. The synchronizer,
// the start at 0 and counting ignored triggers are this design's choices.
//
// Timing: trig follows a rising edge of trig_in by three clocks.
module trigger_if
  import daisy_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               trig_in,
  output logic               trig,
  output logic [EVNUM_W-1:0] evnum
);
  logic [2:0]         sync;
  logic [EVNUM_W-1:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync  <= '0;
      count <= '0;
      trig  <= 1'b0;
      evnum <= '0;
    end else begin
      sync <= {sync[1:0], trig_in};
      trig <= sync[1] && !sync[2];
      if (sync[1] && !sync[2]) begin
        evnum <= count;
        count <= count + 1'b1;
      end
    end
  end
endmodule
