// tb_moesif_fsm: walks every (state, event, others) combination and compares
// with the transition table of the MOESI-F state diagram written out here.
module tb_moesif_fsm;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  cstate_e cur, nxt;
  cevent_e ev;
  logic    others, legal;
  moesif_fsm dut (.cur, .ev, .others, .nxt, .legal);

  // expected next state, or ST_I with ok=0 for illegal
  function automatic void ref_next(input cstate_e c, input cevent_e e, input logic oth,
                                   output cstate_e n, output logic ok);
    ok = 1; n = c;
    case (e)
      EV_RD:        if (c == ST_I) n = oth ? ST_S : ST_E;
      EV_WR:        n = ST_M;
      EV_EVICT:     if (c == ST_I) ok = 0; else n = ST_I;
      EV_FORWARD:   case (c) ST_S, ST_E: n = ST_F; default: ok = 0; endcase
      EV_EXCLUSIVE: if (c == ST_S) n = ST_E; else ok = 0;
      EV_OWN:       case (c) ST_S, ST_M: n = ST_O; default: ok = 0; endcase
      EV_MODIFIED:  case (c) ST_S, ST_O: n = ST_M; default: ok = 0; endcase
      default:      ok = 0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cstate_e en;
    logic eok;
    for (int c = 0; c < 6; c++)
      for (int e = 0; e < 7; e++)
        for (int o = 0; o < 2; o++) begin
          cur = cstate_e'(c); ev = cevent_e'(e); others = 1'(o);
          #1;
          ref_next(cur, ev, others, en, eok);
          checks++;
          if (legal !== eok || (eok && nxt !== en)) begin
            failures++;
            $display("state %0d event %0d others %0d: got %0d/%0d exp %0d/%0d",
                     c, e, o, nxt, legal, en, eok);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
