// moesif_fsm: next-state function of one data-cache line under MOESI-F.
//
// States: I(nvalid), S(hared), E(xclusive), O(wned), M(odified), F(orward).
// Two kinds of events exist. Grants from the shadow tag to the D$ (RD, WR):
//   I -RD-> E when no other cache holds the line, I -RD-> S otherwise;
//   S, E, O, F -WR-> M; I -WR-> M;
//   RD leaves S, E, O, F and M unchanged; WR leaves M unchanged.
// Notifications from the D$ to the shadow tag:
//   Evict: S, E, O, M, F -> I
//   Forward: S -> F, E -> F
//   Exclusive: S -> E
//   Own: S -> O, M -> O
//   Modified: S -> M, O -> M
// Any other (state, event) pair is illegal: `legal` is low and the state is
// returned unchanged. Purely combinational.
//
// Every edge is taken from the published MOESI-F state diagram, with the
// arrow directions as drawn. The use of `others` to choose between the two RD
// edges out of I is this design's reading of the diagram.
module moesif_fsm
  import piuma_pkg::*;
(
  input  cstate_e cur,
  input  cevent_e ev,
  input  logic    others,     // another cache holds the line
  output cstate_e nxt,
  output logic    legal
);
  always_comb begin
    nxt   = cur;
    legal = 1'b1;
    unique case (ev)
      EV_RD:        if (cur == ST_I) nxt = others ? ST_S : ST_E;
      EV_WR:        nxt = ST_M;
      EV_EVICT:     if (cur == ST_I) legal = 1'b0; else nxt = ST_I;
      EV_FORWARD:   if (cur == ST_S || cur == ST_E) nxt = ST_F; else legal = 1'b0;
      EV_EXCLUSIVE: if (cur == ST_S) nxt = ST_E; else legal = 1'b0;
      EV_OWN:       if (cur == ST_S || cur == ST_M) nxt = ST_O; else legal = 1'b0;
      EV_MODIFIED:  if (cur == ST_S || cur == ST_O) nxt = ST_M; else legal = 1'b0;
      default:      legal = 1'b0;
    endcase
  end
endmodule
