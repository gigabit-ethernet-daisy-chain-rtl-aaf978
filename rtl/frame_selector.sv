// frame_selector: destination-MAC router at the receive side of one SFP port.
//
// A frame arriving from the neighbouring board is checked against the MAC
// address of the TCP/IP engine on the same side. A matching frame goes only
// to that engine, a broadcast frame goes both to the engine and to the
// Arbiter that forwards it to the other neighbour, and any other frame goes
// only to the Arbiter. This routing rule is the source's.
//
// How it works: the frame is delayed by a shift register DA_OFFSET+6 bytes
// deep, so that when the first byte of a frame (its first preamble byte)
// reaches the end of the register, the whole destination address is already
// inside it and can be decoded in one step. The route chosen then is held
// for the rest of the frame. The delay line is this design's choice; the
// source does not say how the address is checked.
//
// Interface: rx is the byte stream from the SFP interface; to_sitcp and
// to_arb are copies of it whose enables are gated by the route. Both outputs
// carry the frame DA_OFFSET+7 clock cycles after it enters. is_own, is_bcast
// and is_fwd pulse once per frame, in the cycle the first byte leaves.
module frame_selector
  import daisy_pkg::*;
#(
  parameter int DA_OFS = DA_OFFSET
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [MAC_W-1:0] own_mac,
  input  gmii_t            rx,
  output gmii_t            to_sitcp,
  output gmii_t            to_arb,
  output logic             is_own,
  output logic             is_bcast,
  output logic             is_fwd
);
  localparam int DEPTH = DA_OFS + 6;

  gmii_t pipe [DEPTH];
  logic  last_en;
  logic  route_sitcp, route_arb;

  // byte k of the frame sits in pipe[DEPTH-1-k] when byte 0 is at the end
  logic [MAC_W-1:0] da;
  always_comb begin
    for (int k = 0; k < 6; k++)
      da[MAC_W-1-8*k -: 8] = pipe[DEPTH-1-DA_OFS-k].d;
  end

  logic sop, m_own, m_bcast, dec_sitcp, dec_arb;
  assign sop       = pipe[DEPTH-1].en && !last_en;
  assign m_bcast   = (da == BCAST_MAC);
  assign m_own     = (da == own_mac);
  assign dec_sitcp = m_own || m_bcast;
  assign dec_arb   = !m_own || m_bcast;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) pipe[i] <= '0;
      last_en     <= 1'b0;
      route_sitcp <= 1'b0;
      route_arb   <= 1'b0;
      to_sitcp    <= '0;
      to_arb      <= '0;
      is_own      <= 1'b0;
      is_bcast    <= 1'b0;
      is_fwd      <= 1'b0;
    end else begin
      pipe[0] <= rx;
      for (int i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
      last_en <= pipe[DEPTH-1].en;
      if (sop) begin
        route_sitcp <= dec_sitcp;
        route_arb   <= dec_arb;
      end
      to_sitcp.en <= pipe[DEPTH-1].en && (sop ? dec_sitcp : route_sitcp);
      to_sitcp.d  <= pipe[DEPTH-1].d;
      to_arb.en   <= pipe[DEPTH-1].en && (sop ? dec_arb : route_arb);
      to_arb.d    <= pipe[DEPTH-1].d;
      is_own      <= sop && m_own && !m_bcast;
      is_bcast    <= sop && m_bcast;
      is_fwd      <= sop && !m_own && !m_bcast;
    end
  end
endmodule
