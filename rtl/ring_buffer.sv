// ring_buffer: event store for the board's own event data (64 bit x DEPTH).
//
// The Data I/F writes whole events, a header word followed by its payload
// words, into a circular memory. The write side reads the length field of
// each header, so it always knows which word is the next header and counts
// the headers that have arrived. The read side works one event at a time:
// when no event is open it fetches the next header into a register and
// shows it on head/head_valid, where the TCP Arbiter can compare its event
// number with the FIFO's without reading anything else. Popping the head
// opens the event; its payload words can then be read one per clock.
//
// The word width and depth (64 bit x 4096) are the source's. Showing the
// header separately, and letting an event be read while its tail is still
// being written, are this design's choices: a 4096-word buffer could not
// hold the 37112-byte events used for the throughput measurement if it had
// to wait for a complete event.
//
// Timing: the memory has a registered read port. rd_valid and rd_data
// follow an accepted rd_en by one clock; a header is fetched in two clocks.
module ring_buffer
  import daisy_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic              clk,
  input  logic              rst,
  // write side (Data I/F)
  input  logic              wr_en,
  input  logic [63:0]       wr_data,
  output logic              wr_ready,
  output logic [$clog2(DEPTH):0] used,
  // head of the oldest unopened event
  output logic              head_valid,
  output ev_header_t        head,
  input  logic              head_pop,
  // payload read port (TCP Arbiter)
  input  logic              rd_en,
  output logic              rd_ok,
  output logic [63:0]       rd_data,
  output logic              rd_valid
);
  localparam int AW = $clog2(DEPTH);

  logic [63:0]  mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic [15:0]  wr_left;     // payload words still to be written for the current event
  logic [15:0]  pay_left;    // payload words still to be read for the open event
  logic [AW:0]  hdr_cnt;     // headers written but not yet fetched
  logic         fetch_pend;

  logic wr_acc, fetch, rd_acc;
  assign used     = wr_ptr - rd_ptr;
  assign wr_ready = (used != (AW+1)'(DEPTH));
  assign wr_acc   = wr_en && wr_ready;
  assign fetch    = !head_valid && !fetch_pend && (pay_left == 0) && (hdr_cnt != 0);
  assign rd_ok    = (pay_left != 0) && (used != 0);
  assign rd_acc   = rd_en && rd_ok;

  always_ff @(posedge clk) begin
    if (wr_acc) mem[wr_ptr[AW-1:0]] <= wr_data;
    if (fetch || rd_acc) rd_data <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      wr_left    <= '0;
      pay_left   <= '0;
      hdr_cnt    <= '0;
      fetch_pend <= 1'b0;
      head_valid <= 1'b0;
      head       <= '0;
      rd_valid   <= 1'b0;
    end else begin
      if (wr_acc) begin
        wr_ptr <= wr_ptr + 1'b1;
        if (wr_left == 0) wr_left <= wr_data[15:0];   // header: nwords field
        else              wr_left <= wr_left - 1'b1;
      end
      hdr_cnt <= hdr_cnt + (AW+1)'(wr_acc && wr_left == 0) - (AW+1)'(fetch);

      fetch_pend <= fetch;
      if (fetch || rd_acc) rd_ptr <= rd_ptr + 1'b1;
      rd_valid <= rd_acc;

      if (fetch_pend) begin
        head       <= ev_header_t'(rd_data);
        head_valid <= 1'b1;
      end else if (head_pop && head_valid) begin
        head_valid <= 1'b0;
        pay_left   <= head.nwords;
      end
      if (rd_acc) pay_left <= pay_left - 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) used <= (AW+1)'(DEPTH));
endmodule
