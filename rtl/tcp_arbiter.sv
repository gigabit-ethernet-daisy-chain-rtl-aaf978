// tcp_arbiter: chooses, one whole event at a time, whether the board's own
// event (ring buffer) or the previous board's event (FIFO) goes next into
// the TCP transmit stream of engine 1, toward the DAQ PC.
//
// The three states and their transitions are the source's: after reset the
// arbiter waits in SUSPENSION; when only the ring buffer holds an event it
// moves to MYROESTI, when only the FIFO does to NEIGHBOR, and when both do
// it picks the one with the smaller event number (MYROESTI if the ring
// buffer's number is smaller, otherwise NEIGHBOR). In MYROESTI or NEIGHBOR
// it sends exactly one event and then returns to SUSPENSION. Smaller event
// numbers going first keeps every board's events flowing at the same
// priority. The comparison is made modulo 2**32 (daisy_pkg::ev_older), a
// choice of this design.
//
// Datapath: the event header, already held by the buffer, is loaded into
// the output word register when the state is entered; payload words are
// then read ahead into a two-word queue and shifted out a byte per clock,
// most significant byte first, whenever tx_full is low. Reads are issued
// only while the queue has room, so the stream can run at one byte per
// clock from either source.
//
// Interface: tx_data/tx_wr/tx_full form the transmit port of the TCP/IP
// engine (a byte is taken in every cycle where tx_wr is high; tx_wr is
// never high while tx_full is). ev_done pulses with the last byte of an
// event. state shows the arbiter state.
module tcp_arbiter
  import daisy_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  // ring buffer (own events)
  input  logic            ring_head_valid,
  input  ev_header_t      ring_head,
  output logic            ring_head_pop,
  output logic            ring_rd,
  input  logic            ring_rd_ok,
  input  logic [63:0]     ring_rd_data,
  input  logic            ring_rd_valid,
  // FIFO (events of the previous board)
  input  logic            fifo_head_valid,
  input  ev_header_t      fifo_head,
  output logic            fifo_head_pop,
  output logic            fifo_rd,
  input  logic            fifo_rd_ok,
  input  logic [7:0]      fifo_rd_data,
  input  logic            fifo_rd_valid,
  // TCP transmit port of engine 1
  output logic [7:0]      tx_data,
  output logic            tx_wr,
  input  logic            tx_full,
  output tcp_arb_state_e  state,
  output logic            ev_done
);
  typedef struct packed {
    logic [63:0] w;
    logic [3:0]  nb;
  } qent_t;

  qent_t       q [2];
  logic [1:0]  q_cnt;
  logic [63:0] cur_w;
  logic [3:0]  cur_nb;
  logic [19:0] left;       // payload reads still to issue (words or bytes)

  logic        send, load, src_vld, src_ok, issue, finish, go_my, go_nb;
  logic [3:0]  cur_after;
  logic [63:0] src_w;
  logic [3:0]  src_nb;
  int          q_after;
  qent_t       q_n [2];
  logic [1:0]  q_cnt_n;

  always_comb begin
    send      = (cur_nb != 0) && !tx_full;
    cur_after = cur_nb - 4'(send);
    load      = (cur_after == 0) && (q_cnt != 0);
    src_vld   = (state == MYROESTI) ? ring_rd_valid : (state == NEIGHBOR) ? fifo_rd_valid : 1'b0;
    src_ok    = (state == MYROESTI) ? ring_rd_ok    : (state == NEIGHBOR) ? fifo_rd_ok    : 1'b0;
    src_w     = (state == MYROESTI) ? ring_rd_data : {fifo_rd_data, 56'd0};
    src_nb    = (state == MYROESTI) ? 4'd8 : 4'd1;
    q_after   = int'(q_cnt) - int'(load) + int'(src_vld);
    issue     = (state != SUSPENSION) && (left != 0) && src_ok && (q_after < 2);
    ring_rd   = issue && (state == MYROESTI);
    fifo_rd   = issue && (state == NEIGHBOR);
    finish    = (state != SUSPENSION) && (left == 0) && !src_vld && (q_cnt == 0) && (cur_after == 0);

    // decision taken in SUSPENSION
    go_my = 1'b0;
    go_nb = 1'b0;
    if (state == SUSPENSION) begin
      if (ring_head_valid && !fifo_head_valid)      go_my = 1'b1;
      else if (fifo_head_valid && !ring_head_valid) go_nb = 1'b1;
      else if (ring_head_valid && fifo_head_valid) begin
        if (ev_older(ring_head.evnum, fifo_head.evnum)) go_my = 1'b1;
        else                                            go_nb = 1'b1;
      end
    end
    ring_head_pop = go_my;
    fifo_head_pop = go_nb;

    // next state of the read-ahead queue
    q_n = q;
    if (load) q_n[0] = q[1];
    q_cnt_n = q_cnt - 2'(load);
    if (src_vld) begin
      q_n[q_cnt_n[0]] = '{w: src_w, nb: src_nb};
      q_cnt_n = q_cnt_n + 1'b1;
    end

    tx_wr   = send;
    tx_data = cur_w[63:56];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= SUSPENSION;
      q       <= '{default: '0};
      q_cnt   <= '0;
      cur_w   <= '0;
      cur_nb  <= '0;
      left    <= '0;
      ev_done <= 1'b0;
    end else begin
      q       <= q_n;
      q_cnt   <= q_cnt_n;
      ev_done <= finish;
      if (issue) left <= left - 1'b1;

      if (load) begin
        cur_w  <= q[0].w;
        cur_nb <= q[0].nb;
      end else if (send) begin
        cur_w  <= {cur_w[55:0], 8'd0};
        cur_nb <= cur_after;
      end

      unique case (state)
        SUSPENSION: begin
          if (go_my) begin
            state  <= MYROESTI;
            cur_w  <= ring_head;
            cur_nb <= 4'd8;
            left   <= {4'd0, ring_head.nwords};
          end else if (go_nb) begin
            state  <= NEIGHBOR;
            cur_w  <= fifo_head;
            cur_nb <= 4'd8;
            left   <= {1'b0, fifo_head.nwords, 3'b000};
          end
        end
        default: if (finish) state <= SUSPENSION;
      endcase
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (rst) tx_full |-> !tx_wr);
  a_queue_bound:        assert property (@(posedge clk) disable iff (rst) q_cnt <= 2'd2);
endmodule
