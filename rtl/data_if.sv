// data_if: builds one event per accepted trigger from the digitized samples.
//
// On a trigger pulse the block records the event number, asks the digitizer
// for a read-out (adc_start) and writes an event into the ring buffer: a
// header word {evnum, board_id, PAYLOAD_WORDS} and then PAYLOAD_WORDS words
// of samples, four 16-bit samples per word, the first sample in the top
// bits. Triggers that arrive while an event is being built are ignored and
// reported on trig_ignored; this matches the measured behaviour that above
// the saturation rate the extra triggers were ignored.
//
// The source only says that the Data I/F receives the digitized data after
// a trigger and produces event data containing them and the event number;
// the sample format, the packing, the header and the back-pressure
// (adc_ready low while the ring buffer is full, pausing the read-out) are
// this design's. PAYLOAD_WORDS = 4638 makes an event 37112 bytes, the
// event size of the throughput measurement.
//
// Timing: the header is written the clock after the trigger if the ring
// buffer has room; a payload word is written the clock after its fourth
// sample is taken.
module data_if
  import daisy_pkg::*;
#(
  parameter int PAYLOAD_WORDS = 4638
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               trig,
  input  logic [EVNUM_W-1:0] evnum,
  input  logic [15:0]        board_id,
  // digitizer
  output logic               adc_start,
  input  logic               adc_valid,
  input  logic [15:0]        adc_data,
  output logic               adc_ready,
  // ring buffer
  output logic               wr_en,
  output logic [63:0]        wr_data,
  input  logic               wr_ready,
  output logic               busy,
  output logic               trig_ignored
);
  typedef enum logic [1:0] {IDLE, HEADER, COLLECT} st_e;

  st_e                st;
  logic [EVNUM_W-1:0] ev;
  logic [15:0]        words_left;  // payload words still to be collected
  logic [1:0]         nsamp;
  logic [47:0]        pack;
  logic [63:0]        word;        // completed word of four samples
  logic               word_full;   // word waits for the ring buffer

  assign busy      = (st != IDLE);
  assign adc_ready = (st == COLLECT) && !word_full && (words_left != 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      st           <= IDLE;
      ev           <= '0;
      words_left   <= '0;
      nsamp        <= '0;
      pack         <= '0;
      word         <= '0;
      word_full    <= 1'b0;
      wr_en        <= 1'b0;
      wr_data      <= '0;
      adc_start    <= 1'b0;
      trig_ignored <= 1'b0;
    end else begin
      adc_start    <= 1'b0;
      trig_ignored <= trig && (st != IDLE);
      if (wr_en && wr_ready) wr_en <= 1'b0;

      unique case (st)
        IDLE: if (trig) begin
          ev        <= evnum;
          st        <= HEADER;
          adc_start <= 1'b1;
        end
        HEADER: if (!wr_en || wr_ready) begin
          wr_en      <= 1'b1;
          wr_data    <= {ev, board_id, 16'(PAYLOAD_WORDS)};
          words_left <= 16'(PAYLOAD_WORDS);
          nsamp      <= '0;
          word_full  <= 1'b0;
          st         <= (PAYLOAD_WORDS == 0) ? IDLE : COLLECT;
        end
        COLLECT: begin
          if (adc_valid && adc_ready) begin
            nsamp <= nsamp + 1'b1;
            if (nsamp == 2'd3) begin
              word       <= {pack, adc_data};
              word_full  <= 1'b1;
              words_left <= words_left - 1'b1;
            end else begin
              pack <= {pack[31:0], adc_data};
            end
          end
          if (word_full && (!wr_en || wr_ready)) begin
            wr_en     <= 1'b1;
            wr_data   <= word;
            word_full <= 1'b0;
            if (words_left == 16'd0) st <= IDLE;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (rst)
    (wr_en && !wr_ready) |=> (wr_en && $stable(wr_data)));
endmodule
