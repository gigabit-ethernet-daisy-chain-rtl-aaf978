// rx_fifo: receive buffer for event data arriving from the previous board
// (8 bit x DEPTH).
//
// The TCP/IP engine that faces the previous board writes the received TCP
// byte stream here. The FIFO doubles as the TCP receive buffer: its fill
// level goes back to the engine (wc), which shrinks the advertised TCP
// window as the FIFO fills, so the sender pauses instead of data being
// lost. Size (8 bit x 65536) and the flow-control role are the source's.
//
// The stream is cut into events the same way as in the ring buffer: the
// write side parses the 8 header bytes of each event (most significant
// byte first) and counts completed headers; the read side fetches the next
// header with 8 reads into head, and after head_pop serves the event's
// nwords*8 payload bytes. A byte written while the FIFO is full is lost and
// sets the sticky overflow flag, which a working flow control never does.
//
// Timing: registered read port, rd_data/rd_valid one clock after an
// accepted rd_en; a header fetch takes nine clocks.
module rx_fifo
  import daisy_pkg::*;
#(
  parameter int DEPTH = 65536
) (
  input  logic              clk,
  input  logic              rst,
  // write side (TCP receive stream of engine 0)
  input  logic              wr_en,
  input  logic [7:0]        wr_data,
  output logic [$clog2(DEPTH):0] wc,
  output logic              overflow,
  // head of the oldest unopened event
  output logic              head_valid,
  output ev_header_t        head,
  input  logic              head_pop,
  // payload read port (TCP Arbiter)
  input  logic              rd_en,
  output logic              rd_ok,
  output logic [7:0]        rd_data,
  output logic              rd_valid
);
  localparam int AW = $clog2(DEPTH);

  logic [7:0]   mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic [2:0]   hdr_idx;     // header byte being written
  logic [7:0]   hdr_sr;      // previous header byte (high byte of nwords)
  logic [18:0]  wr_left;     // payload bytes still to be written
  logic [18:0]  pay_left;    // payload bytes still to be read
  logic [AW:0]  hdr_cnt;     // complete headers written but not fetched
  logic         fetching;
  logic [3:0]   f_iss, f_rcv;  // header bytes requested / received
  logic         f_pend;
  logic [55:0]  f_sr;

  logic full, wr_acc, f_rd, rd_acc;
  assign wc     = wr_ptr - rd_ptr;
  assign full   = (wc == (AW+1)'(DEPTH));
  assign wr_acc = wr_en && !full;
  assign f_rd   = fetching && (f_iss != 4'd8);
  assign rd_ok  = (pay_left != 0) && (wc != 0) && !fetching;
  assign rd_acc = rd_en && rd_ok;

  logic [15:0] wr_nwords;
  assign wr_nwords = {hdr_sr[7:0], wr_data};

  always_ff @(posedge clk) begin
    if (wr_acc) mem[wr_ptr[AW-1:0]] <= wr_data;
    if (f_rd || rd_acc) rd_data <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      hdr_idx    <= '0;
      hdr_sr     <= '0;
      wr_left    <= '0;
      pay_left   <= '0;
      hdr_cnt    <= '0;
      fetching   <= 1'b0;
      f_iss      <= '0;
      f_rcv      <= '0;
      f_pend     <= 1'b0;
      f_sr       <= '0;
      head_valid <= 1'b0;
      head       <= '0;
      rd_valid   <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      if (wr_en && full) overflow <= 1'b1;
      if (wr_acc) begin
        wr_ptr <= wr_ptr + 1'b1;
        if (wr_left == 0) begin
          hdr_sr  <= wr_data;
          hdr_idx <= hdr_idx + 1'b1;
          if (hdr_idx == 3'd7) wr_left <= {wr_nwords, 3'b000};
        end else begin
          wr_left <= wr_left - 1'b1;
        end
      end

      // header fetch: eight reads, collected one clock later
      if (!fetching && !head_valid && pay_left == 0 && hdr_cnt != 0) begin
        fetching <= 1'b1;
        f_iss    <= '0;
        f_rcv    <= '0;
      end
      hdr_cnt <= hdr_cnt + (AW+1)'(wr_acc && wr_left == 0 && hdr_idx == 3'd7)
                         - (AW+1)'(!fetching && !head_valid && pay_left == 0 && hdr_cnt != 0);
      if (f_rd) f_iss <= f_iss + 1'b1;
      f_pend <= f_rd;
      if (f_pend) begin
        f_sr  <= {f_sr[47:0], rd_data};
        f_rcv <= f_rcv + 1'b1;
        if (f_rcv == 4'd7) begin
          head       <= ev_header_t'({f_sr, rd_data});
          head_valid <= 1'b1;
          fetching   <= 1'b0;
        end
      end

      if (f_rd || rd_acc) rd_ptr <= rd_ptr + 1'b1;
      rd_valid <= rd_acc;

      if (head_pop && head_valid) begin
        head_valid <= 1'b0;
        pay_left   <= {head.nwords, 3'b000};
      end
      if (rd_acc) pay_left <= pay_left - 1'b1;
    end
  end
endmodule
