// shadow_tag: die-level directory of the MOESI-F state of tracked lines in every D$.
//
// For each of NLINES tracked lines it keeps the state the line has in each of
// NCACHES data caches. A request names a cache, a line and an event (a grant
// request RD/WR from a cache that misses, or a notification Evict, Forward,
// Exclusive, Own, Modified that a cache sends when it changes state). The
// requester's entry moves by moesif_fsm; for RD the fsm is told whether any
// other cache holds the line. A WR also invalidates the line in every other
// cache, listed in resp_inval so the caches can drop their copies. An illegal
// event leaves the state unchanged and raises resp_err. One request per cycle;
// the response (the requester's new state) is registered and valid the next
// cycle.
//
// A die-level shadow tag tracking all lines and the MOESI-F transitions follow
// the paper. Its organisation, the invalidate-on-write rule (not drawn in the
// state diagram) and the number of tracked lines are this design's choices.
module shadow_tag
  import piuma_pkg::*;
#(
  parameter int NCACHES = 48,
  parameter int NLINES  = 64,
  localparam int CW = $clog2(NCACHES),
  localparam int LW = $clog2(NLINES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  input  logic [CW-1:0]      req_cache,
  input  logic [LW-1:0]      req_line,
  input  cevent_e            req_ev,
  output logic               resp_valid,
  output cstate_e            resp_state,
  output logic               resp_err,
  output logic [NCACHES-1:0] resp_inval
);
  cstate_e st [NLINES][NCACHES];

  logic    others;
  cstate_e nxt;
  logic    legal;
  always_comb begin
    others = 1'b0;
    for (int c = 0; c < NCACHES; c++)
      if (c != int'(req_cache) && st[req_line][c] != ST_I) others = 1'b1;
  end

  moesif_fsm u_fsm (.cur(st[req_line][req_cache]), .ev(req_ev), .others(others),
                    .nxt(nxt), .legal(legal));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NLINES; l++)
        for (int c = 0; c < NCACHES; c++) st[l][c] <= ST_I;
      resp_valid <= 1'b0; resp_state <= ST_I; resp_err <= 1'b0; resp_inval <= '0;
    end else begin
      resp_valid <= req_valid;
      resp_inval <= '0;
      if (req_valid) begin
        st[req_line][req_cache] <= nxt;
        resp_state <= nxt;
        resp_err   <= !legal;
        if (req_ev == EV_WR) begin
          for (int c = 0; c < NCACHES; c++)
            if (c != int'(req_cache) && st[req_line][c] != ST_I) begin
              st[req_line][c] <= ST_I;
              resp_inval[c]   <= 1'b1;
            end
        end
      end
    end
  end
endmodule
