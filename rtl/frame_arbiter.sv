// frame_arbiter: merges two frame streams onto one SFP transmit port.
//
// One input comes from the Selector of the opposite port (frames passing
// through the board), the other from the local TCP/IP engine. Whichever
// frame starts first while the output is free is sent whole; a frame that
// starts on the other input while a frame is being sent collides and is
// discarded whole. This first-come rule and the discarding are the
// source's. Two choices are this design's own: when both frames start in
// the same cycle, the local engine wins; and the output stays reserved for
// IFG idle cycles after each frame, so that a frame starting in that gap is
// discarded as well and sent frames keep the Ethernet inter-frame gap.
//
// Interface: in_sel and in_sitcp are byte streams; tx goes to the SFP
// interface one clock after the input (a registered pass). drop_sel and
// drop_sitcp pulse in the cycle a frame on that input is discarded,
// sent_sel and sent_sitcp when one is accepted.
module frame_arbiter
  import daisy_pkg::*;
#(
  parameter int IFG = MIN_IFG
) (
  input  logic  clk,
  input  logic  rst,
  input  gmii_t in_sel,
  input  gmii_t in_sitcp,
  output gmii_t tx,
  output logic  sent_sel,
  output logic  sent_sitcp,
  output logic  drop_sel,
  output logic  drop_sitcp
);
  typedef enum logic [1:0] {NONE, OWN_SEL, OWN_SITCP} owner_e;

  owner_e owner;
  logic   prev_sel, prev_sitcp;
  logic [$clog2(IFG+1)-1:0] gap;

  logic sop_sel, sop_sitcp, take_sel, take_sitcp;
  assign sop_sel   = in_sel.en && !prev_sel;
  assign sop_sitcp = in_sitcp.en && !prev_sitcp;

  always_comb begin
    take_sel   = 1'b0;
    take_sitcp = 1'b0;
    unique case (owner)
      OWN_SITCP: take_sitcp = in_sitcp.en;
      OWN_SEL:   take_sel   = in_sel.en;
      default:
        if (gap == 0) begin
          if (sop_sitcp)    take_sitcp = 1'b1;
          else if (sop_sel) take_sel   = 1'b1;
        end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      owner      <= NONE;
      prev_sel   <= 1'b0;
      prev_sitcp <= 1'b0;
      gap        <= '0;
      tx         <= '0;
      sent_sel   <= 1'b0;
      sent_sitcp <= 1'b0;
      drop_sel   <= 1'b0;
      drop_sitcp <= 1'b0;
    end else begin
      prev_sel   <= in_sel.en;
      prev_sitcp <= in_sitcp.en;
      sent_sel   <= sop_sel && take_sel;
      sent_sitcp <= sop_sitcp && take_sitcp;
      drop_sel   <= sop_sel && !take_sel;
      drop_sitcp <= sop_sitcp && !take_sitcp;

      if (take_sitcp)    tx <= in_sitcp;
      else if (take_sel) tx <= in_sel;
      else               tx <= '0;

      unique case (owner)
        NONE: begin
          if (gap != 0) gap <= gap - 1'b1;
          else if (take_sitcp) owner <= OWN_SITCP;
          else if (take_sel)   owner <= OWN_SEL;
        end
        default:
          if (!take_sel && !take_sitcp) begin
            owner <= NONE;
            gap   <= ($clog2(IFG+1))'(IFG - 1);
          end
      endcase
    end
  end

  // a frame is never sent while the output is reserved
  a_no_start_in_gap: assert property (@(posedge clk) disable iff (rst)
    (owner == NONE && gap != 0) |-> !(take_sel || take_sitcp));
endmodule
