// data_carrier: event-data path of the network processor (133 MHz).
//
// Own events from the Data I/F go into the ring buffer; events of the
// previous board, received over TCP by engine 0, go into the FIFO. The TCP
// Arbiter forwards whole events from either store into the TCP transmit
// stream of engine 1, oldest event number first. Because the previous
// board's events are received and re-sent by this board's own TCP/IP
// engines rather than passed through the Path Controller, TCP frames of two
// boards never meet in one Path Controller Arbiter. The structure (ring
// buffer, FIFO, TCP Arbiter) and both buffer sizes are the source's.
//
// Interface: ring_wr_* is the Data I/F write port (ring_wr_ready is its
// back-pressure); rx_* is the receive stream of engine 0 and rx_wc the FIFO
// fill level it uses for its TCP window, saturated to 16 bits; tx_* is the
// transmit port of engine 1.
module data_carrier
  import daisy_pkg::*;
#(
  parameter int RING_DEPTH = 4096,
  parameter int FIFO_DEPTH = 65536
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           ring_wr_en,
  input  logic [63:0]    ring_wr_data,
  output logic           ring_wr_ready,
  input  logic           rx_wr,
  input  logic [7:0]     rx_data,
  output logic [15:0]    rx_wc,
  output logic           rx_overflow,
  output logic [7:0]     tx_data,
  output logic           tx_wr,
  input  logic           tx_full,
  output tcp_arb_state_e arb_state,
  output logic           ev_done
);
  logic                          rb_head_valid, rb_head_pop, rb_rd, rb_rd_ok, rb_rd_valid;
  ev_header_t                    rb_head;
  logic [63:0]                   rb_rd_data;
  logic                          ff_head_valid, ff_head_pop, ff_rd, ff_rd_ok, ff_rd_valid;
  ev_header_t                    ff_head;
  logic [7:0]                    ff_rd_data;
  logic [$clog2(FIFO_DEPTH):0]   ff_wc;

  ring_buffer #(.DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst,
    .wr_en(ring_wr_en), .wr_data(ring_wr_data), .wr_ready(ring_wr_ready), .used(),
    .head_valid(rb_head_valid), .head(rb_head), .head_pop(rb_head_pop),
    .rd_en(rb_rd), .rd_ok(rb_rd_ok), .rd_data(rb_rd_data), .rd_valid(rb_rd_valid)
  );

  rx_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(rx_wr), .wr_data(rx_data), .wc(ff_wc), .overflow(rx_overflow),
    .head_valid(ff_head_valid), .head(ff_head), .head_pop(ff_head_pop),
    .rd_en(ff_rd), .rd_ok(ff_rd_ok), .rd_data(ff_rd_data), .rd_valid(ff_rd_valid)
  );

  tcp_arbiter u_arb (
    .clk, .rst,
    .ring_head_valid(rb_head_valid), .ring_head(rb_head), .ring_head_pop(rb_head_pop),
    .ring_rd(rb_rd), .ring_rd_ok(rb_rd_ok), .ring_rd_data(rb_rd_data), .ring_rd_valid(rb_rd_valid),
    .fifo_head_valid(ff_head_valid), .fifo_head(ff_head), .fifo_head_pop(ff_head_pop),
    .fifo_rd(ff_rd), .fifo_rd_ok(ff_rd_ok), .fifo_rd_data(ff_rd_data), .fifo_rd_valid(ff_rd_valid),
    .tx_data, .tx_wr, .tx_full, .state(arb_state), .ev_done
  );

  assign rx_wc = (int'(ff_wc) > 65535) ? 16'hFFFF : 16'(ff_wc);
endmodule
