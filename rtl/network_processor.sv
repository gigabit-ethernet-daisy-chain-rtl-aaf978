// network_processor: the daisy-chain network processor of one read-out board.
//
// It sits between two SFP ports and two TCP/IP engines. Port 0 and engine 0
// face the previous board (further from the DAQ PC); port 1 and engine 1
// face the next board or the DAQ PC. Two independent paths make up the
// block, as in the source:
//  * the Path Controller (125 MHz frame clock) forwards every Ethernet frame
//    that is not addressed to this board straight to the other port, hands
//    frames addressed to an engine to that engine, and merges the engines'
//    own frames into the outgoing ports;
//  * the Data Carrier (133 MHz system clock) takes own events from the Data
//    I/F and the previous board's events from engine 0's TCP receive stream
//    and re-sends both, oldest first, on engine 1's TCP stream.
// Engines and SFP interfaces are external IP; their signals are ports here.
// The two clock domains meet only inside the TCP/IP engines.
module network_processor
  import daisy_pkg::*;
#(
  parameter int RING_DEPTH = 4096,
  parameter int FIFO_DEPTH = 65536
) (
  // frame domain (125 MHz)
  input  logic             clk_gmii,
  input  logic             rst_gmii,
  input  logic [MAC_W-1:0] mac0,
  input  logic [MAC_W-1:0] mac1,
  input  gmii_t            sfp0_rx,
  output gmii_t            sfp0_tx,
  input  gmii_t            sfp1_rx,
  output gmii_t            sfp1_tx,
  output gmii_t            to_sitcp0,
  input  gmii_t            from_sitcp0,
  output gmii_t            to_sitcp1,
  input  gmii_t            from_sitcp1,
  output logic [2:0]       stat_sel0,
  output logic [2:0]       stat_sel1,
  output logic [3:0]       stat_arb0,
  output logic [3:0]       stat_arb1,
  // event domain (133 MHz)
  input  logic             clk_sys,
  input  logic             rst_sys,
  input  logic             ring_wr_en,
  input  logic [63:0]      ring_wr_data,
  output logic             ring_wr_ready,
  input  logic             tcp0_rx_wr,
  input  logic [7:0]       tcp0_rx_data,
  output logic [15:0]      tcp0_rx_wc,
  output logic             tcp0_rx_overflow,
  output logic [7:0]       tcp1_tx_data,
  output logic             tcp1_tx_wr,
  input  logic             tcp1_tx_full,
  output tcp_arb_state_e   arb_state,
  output logic             ev_done
);
  path_controller u_path (
    .clk(clk_gmii), .rst(rst_gmii), .mac0, .mac1,
    .sfp0_rx, .sfp0_tx, .sfp1_rx, .sfp1_tx,
    .to_sitcp0, .from_sitcp0, .to_sitcp1, .from_sitcp1,
    .stat_sel0, .stat_sel1, .stat_arb0, .stat_arb1
  );

  data_carrier #(.RING_DEPTH(RING_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_carrier (
    .clk(clk_sys), .rst(rst_sys),
    .ring_wr_en, .ring_wr_data, .ring_wr_ready,
    .rx_wr(tcp0_rx_wr), .rx_data(tcp0_rx_data), .rx_wc(tcp0_rx_wc), .rx_overflow(tcp0_rx_overflow),
    .tx_data(tcp1_tx_data), .tx_wr(tcp1_tx_wr), .tx_full(tcp1_tx_full),
    .arb_state, .ev_done
  );
endmodule
