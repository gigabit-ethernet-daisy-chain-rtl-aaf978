// roesti_fpga: the FPGA logic of one straw-tube read-out board with the
// Gigabit Ethernet daisy chain.
//
// A trigger from the trigger connector is numbered by the Trigger I/F; the
// Data I/F then collects the digitized samples and writes an event, tagged
// with the event number and the board ID, into the Network Processor. The
// Network Processor sends it, together with the events it receives from the
// previous board, over TCP toward the DAQ PC, and passes through all
// Ethernet frames that are not addressed to this board. Module Control
// executes the slow-control requests the DAQ PC sends over UDP. This block
// split is the source's.
//
// The two TCP/IP engines (with their UDP slow-control bus), the two SFP
// physical-layer interfaces and the digitizer are external to this logic;
// every signal that would go to them is a port: sitcp0_* / sitcp1_* for the
// engines' frame and user sides, sfp0_* / sfp1_* for the physical layers,
// adc_* for the digitizer, sc_* for the slow-control bus of engine 1.
// Clocks: clk_gmii (125 MHz) for all frames, clk_sys (133 MHz) for the rest,
// each with a synchronous active-high reset.
module roesti_fpga
  import daisy_pkg::*;
#(
  parameter int RING_DEPTH    = 4096,
  parameter int FIFO_DEPTH    = 65536,
  parameter int PAYLOAD_WORDS = 4638,
  parameter int NREG          = 16
) (
  input  logic             clk_gmii,
  input  logic             rst_gmii,
  input  logic             clk_sys,
  input  logic             rst_sys,
  // trigger connector and digitizer
  input  logic             trig_in,
  output logic             adc_start,
  input  logic             adc_valid,
  input  logic [15:0]      adc_data,
  output logic             adc_ready,
  // SFP physical layers (frame domain)
  input  gmii_t            sfp0_rx,
  output gmii_t            sfp0_tx,
  input  gmii_t            sfp1_rx,
  output gmii_t            sfp1_tx,
  // TCP/IP engines, frame side (frame domain)
  input  logic [MAC_W-1:0] mac0,
  input  logic [MAC_W-1:0] mac1,
  output gmii_t            sitcp0_rx,
  input  gmii_t            sitcp0_tx,
  output gmii_t            sitcp1_rx,
  input  gmii_t            sitcp1_tx,
  // TCP/IP engines, user side (system domain)
  input  logic             sitcp0_tcp_rx_wr,
  input  logic [7:0]       sitcp0_tcp_rx_data,
  output logic [15:0]      sitcp0_tcp_rx_wc,
  output logic [7:0]       sitcp1_tcp_tx_data,
  output logic             sitcp1_tcp_tx_wr,
  input  logic             sitcp1_tcp_tx_full,
  input  logic             sc_we,
  input  logic             sc_re,
  input  logic [31:0]      sc_addr,
  input  logic [7:0]       sc_wd,
  output logic             sc_ack,
  output logic [7:0]       sc_rd,
  // settings and status
  output logic [7:0]       regs [NREG],
  output logic [2:0]       stat_sel0,
  output logic [2:0]       stat_sel1,
  output logic [3:0]       stat_arb0,
  output logic [3:0]       stat_arb1,
  output tcp_arb_state_e   arb_state,
  output logic             ev_done,
  output logic             daq_busy,
  output logic             trig_ignored,
  output logic             rx_overflow
);
  logic               trig;
  logic [EVNUM_W-1:0] evnum;
  logic [15:0]        board_id;
  logic               ring_wr_en, ring_wr_ready;
  logic [63:0]        ring_wr_data;

  trigger_if u_trigger (
    .clk(clk_sys), .rst(rst_sys), .trig_in, .trig, .evnum
  );

  data_if #(.PAYLOAD_WORDS(PAYLOAD_WORDS)) u_data (
    .clk(clk_sys), .rst(rst_sys), .trig, .evnum, .board_id,
    .adc_start, .adc_valid, .adc_data, .adc_ready,
    .wr_en(ring_wr_en), .wr_data(ring_wr_data), .wr_ready(ring_wr_ready),
    .busy(daq_busy), .trig_ignored
  );

  module_control #(.NREG(NREG)) u_modctl (
    .clk(clk_sys), .rst(rst_sys), .sc_we, .sc_re, .sc_addr, .sc_wd,
    .sc_ack, .sc_rd, .regs, .board_id
  );

  network_processor #(.RING_DEPTH(RING_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_np (
    .clk_gmii, .rst_gmii, .mac0, .mac1,
    .sfp0_rx, .sfp0_tx, .sfp1_rx, .sfp1_tx,
    .to_sitcp0(sitcp0_rx), .from_sitcp0(sitcp0_tx),
    .to_sitcp1(sitcp1_rx), .from_sitcp1(sitcp1_tx),
    .stat_sel0, .stat_sel1, .stat_arb0, .stat_arb1,
    .clk_sys, .rst_sys,
    .ring_wr_en, .ring_wr_data, .ring_wr_ready,
    .tcp0_rx_wr(sitcp0_tcp_rx_wr), .tcp0_rx_data(sitcp0_tcp_rx_data),
    .tcp0_rx_wc(sitcp0_tcp_rx_wc), .tcp0_rx_overflow(rx_overflow),
    .tcp1_tx_data(sitcp1_tcp_tx_data), .tcp1_tx_wr(sitcp1_tcp_tx_wr),
    .tcp1_tx_full(sitcp1_tcp_tx_full),
    .arb_state, .ev_done
  );
endmodule
