// path_controller: routes Ethernet frames between the two SFP ports and
// the two TCP/IP engines of one board (125 MHz frame clock).
//
// Port 0 faces the previous board (further from the DAQ PC), port 1 the
// next board or the DAQ PC. Selector0 checks frames from SFP port 0 against
// the MAC address of engine 0 and hands the rest to Arbiter1, which sends
// them out of SFP port 1 together with the frames of engine 1. Selector1
// and Arbiter0 do the same in the other direction. This cross connection is
// the source's block diagram; the Selector and Arbiter describe their own
// timing and choices.
//
// Interface: sfp*_rx / sfp*_tx are the frame streams of the two SFP
// interfaces, to_sitcp* / from_sitcp* those of the two TCP/IP engines,
// mac0 / mac1 the engines' MAC addresses. The stat_* outputs are the
// per-frame pulses of the Selectors and Arbiters, for counters.
module path_controller
  import daisy_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
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
  output logic [2:0]       stat_sel0,   // {own, bcast, fwd}
  output logic [2:0]       stat_sel1,
  output logic [3:0]       stat_arb0,   // {sent_sel, sent_sitcp, drop_sel, drop_sitcp}
  output logic [3:0]       stat_arb1
);
  gmii_t sel0_to_arb1, sel1_to_arb0;

  frame_selector u_selector0 (
    .clk, .rst, .own_mac(mac0), .rx(sfp0_rx),
    .to_sitcp(to_sitcp0), .to_arb(sel0_to_arb1),
    .is_own(stat_sel0[2]), .is_bcast(stat_sel0[1]), .is_fwd(stat_sel0[0])
  );

  frame_selector u_selector1 (
    .clk, .rst, .own_mac(mac1), .rx(sfp1_rx),
    .to_sitcp(to_sitcp1), .to_arb(sel1_to_arb0),
    .is_own(stat_sel1[2]), .is_bcast(stat_sel1[1]), .is_fwd(stat_sel1[0])
  );

  frame_arbiter u_arbiter0 (
    .clk, .rst, .in_sel(sel1_to_arb0), .in_sitcp(from_sitcp0), .tx(sfp0_tx),
    .sent_sel(stat_arb0[3]), .sent_sitcp(stat_arb0[2]),
    .drop_sel(stat_arb0[1]), .drop_sitcp(stat_arb0[0])
  );

  frame_arbiter u_arbiter1 (
    .clk, .rst, .in_sel(sel0_to_arb1), .in_sitcp(from_sitcp1), .tx(sfp1_tx),
    .sent_sel(stat_arb1[3]), .sent_sitcp(stat_arb1[2]),
    .drop_sel(stat_arb1[1]), .drop_sitcp(stat_arb1[0])
  );
endmodule
