// tb_shadow_tag: random requests from 6 caches on 8 lines against a directory
// model built from the MOESI-F table; checks the granted state, illegal
// events, and the invalidations a write causes in the other caches.
module tb_shadow_tag;
  import piuma_pkg::*;
  int checks = 0, failures = 0, invals = 0, illegal = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NC = 6, NL = 8;
  logic req_valid, resp_valid, resp_err;
  logic [2:0] req_cache, req_line;
  cevent_e req_ev;
  cstate_e resp_state;
  logic [NC-1:0] resp_inval;
  shadow_tag #(.NCACHES(NC), .NLINES(NL)) dut (.*);

  cstate_e m [NL][NC];

  function automatic void ref_next(input cstate_e c, input cevent_e e, input logic oth,
                                   output cstate_e n, output logic ok);
    ok = 1; n = c;
    case (e)
      EV_RD:        if (c == ST_I) n = oth ? ST_S : ST_E;
      EV_WR:        n = ST_M;
      EV_EVICT:     if (c == ST_I) ok = 0; else n = ST_I;
      EV_FORWARD:   if (c == ST_S || c == ST_E) n = ST_F; else ok = 0;
      EV_EXCLUSIVE: if (c == ST_S) n = ST_E; else ok = 0;
      EV_OWN:       if (c == ST_S || c == ST_M) n = ST_O; else ok = 0;
      EV_MODIFIED:  if (c == ST_S || c == ST_O) n = ST_M; else ok = 0;
      default:      ok = 0;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) for (int c = 0; c < NC; c++) m[l][c] = ST_I;
    req_valid = 0; req_cache = 0; req_line = 0; req_ev = EV_RD;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int c, l;
      logic oth, ok;
      cstate_e n;
      logic [NC-1:0] einv;
      c = $urandom_range(0, NC - 1); l = $urandom_range(0, NL - 1);
      @(negedge clk);
      req_valid = 1; req_cache = 3'(c); req_line = 3'(l);
      req_ev = cevent_e'($urandom_range(0, 9) < 4 ? 0 : $urandom_range(1, 6));
      oth = 0;
      for (int k = 0; k < NC; k++) if (k != c && m[l][k] != ST_I) oth = 1;
      ref_next(m[l][c], req_ev, oth, n, ok);
      einv = '0;
      if (req_ev == EV_WR)
        for (int k = 0; k < NC; k++) if (k != c && m[l][k] != ST_I) begin einv[k] = 1; m[l][k] = ST_I; end
      m[l][c] = n;
      @(negedge clk);
      req_valid = 0;
      checks++;
      if (!resp_valid || resp_state !== n || resp_err !== !ok || resp_inval !== einv) begin
        failures++;
        if (failures < 5) $display("t %0d got %0d %0d %b exp %0d %0d %b", t, resp_state, resp_err, resp_inval, n, !ok, einv);
      end
      if (einv != 0) invals++;
      if (!ok) illegal++;
    end
    checks++;
    if (invals == 0 || illegal == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
