// router: NPORTS-port virtual cut-through packet router of the on-die mesh.
//
// Each input port has a BUF_DEPTH-flit buffer. The head flit at the front of a
// buffer is routed XY: first along X to the destination column, then along Y,
// then out of the destination's local port named in the header. An output is
// granted (round robin) to a waiting packet only when the downstream credit
// count covers the whole packet (1, 2 or 4 flits) -- this is what makes the
// switching virtual cut-through rather than wormhole. The output stays owned
// by that packet until its tail flit has left. Flow control is credit based:
// every flit sent spends one credit, and the downstream buffer returns one
// credit (out_credit) each time it frees an entry.
//
// Timing: a flit sampled on in_flit at clock edge t is written to the buffer,
// allocated at edge t+1, crosses the switch at t+2 and is registered in the
// link stage at t+3, so the next router samples it at edge t+4: the no-load
// latency is 4 cycles including link traversal. One flit per output per cycle.
//
// The port count, link width, packet sizes, XY routing, credits, cut-through
// switching and 4-cycle latency follow the paper. The port assignment (0..3 =
// N,E,S,W; 4..9 local), buffer depth, header layout, and the split of the
// latency into stages are this design's own choices.
module router
  import piuma_pkg::*;
#(
  parameter int          NP        = NPORTS,
  parameter int          BUF_DEPTH = 8,
  parameter logic [2:0]  MY_X      = 3'd0,
  parameter logic        MY_Y      = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  flit_t  in_flit   [NP],
  input  logic   in_valid  [NP],
  output logic   in_credit [NP],   // credit back to the upstream sender
  output flit_t  out_flit  [NP],
  output logic   out_valid [NP],
  input  logic   out_credit[NP]    // credit from the downstream buffer
);
  localparam int CW = $clog2(BUF_DEPTH + 1);
  localparam int PW = $clog2(NP);

  // ---------------- input buffers ----------------
  flit_t          q_front [NP];
  logic           q_empty [NP];
  logic           q_pop   [NP];
  logic [CW-1:0]  q_count [NP];
  logic           q_full  [NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(BUF_DEPTH)) u_q (
      .clk, .rst_n,
      .push (in_valid[i]), .wdata(in_flit[i]),
      .pop  (q_pop[i]),    .rdata(q_front[i]),
      .empty(q_empty[i]),  .full(q_full[i]), .count(q_count[i]));
  end

  // ---------------- route computation ----------------
  function automatic logic [PW-1:0] route(input hdr_t h);
    logic [2:0] dx;
    logic       dy;
    dx = h.dst_router[2:0];
    dy = h.dst_router[3];
    if (dx != MY_X)     return (dx > MY_X) ? PW'(P_E) : PW'(P_W);
    else if (dy != MY_Y) return (dy > MY_Y) ? PW'(P_S) : PW'(P_N);
    else                return h.dst_port[PW-1:0];
  endfunction

  // ---------------- per-output state ----------------
  logic           busy   [NP];            // output owned by a packet
  logic [PW-1:0]  owner  [NP];            // input that owns it
  logic           in_act [NP];            // input is forwarding a packet
  logic [CW-1:0]  credit [NP];            // downstream free entries
  logic [PW-1:0]  rr     [NP];            // round-robin pointer per output

  // Header of the front flit of every input buffer, its output and length
  logic [PW-1:0]  f_out [NP];
  logic [2:0]     f_len [NP];
  for (genvar i = 0; i < NP; i++) begin : g_hdr
    hdr_t fh;
    assign fh       = hdr_t'(q_front[i].data[FLIT_W-1 -: HDR_W]);
    assign f_out[i] = route(fh);
    assign f_len[i] = 3'(len_flits(fh.len));
  end

  // Requests: input i wants output o when its front flit is an unallocated head
  logic [NP-1:0]  want [NP];              // want[o][i]
  always_comb begin
    for (int o = 0; o < NP; o++) want[o] = '0;
    for (int i = 0; i < NP; i++)
      if (!q_empty[i] && q_front[i].head && !in_act[i]) want[f_out[i]][i] = 1'b1;
  end

  // Grant: a free output whose credits cover the whole packet picks one requester
  logic           gnt_v [NP];
  logic [PW-1:0]  gnt_i [NP];
  always_comb begin
    for (int o = 0; o < NP; o++) begin
      gnt_v[o] = 1'b0;
      gnt_i[o] = '0;
      for (int k = 0; k < NP; k++) begin
        int unsigned i;
        i = (int'(rr[o]) + k) % NP;
        if (!busy[o] && !gnt_v[o] && want[o][i] && int'(credit[o]) >= int'(f_len[i])) begin
          gnt_v[o] = 1'b1;
          gnt_i[o] = PW'(i);
        end
      end
    end
  end

  // Traversal: an owned output moves one flit from its owner's buffer
  logic  send [NP];
  flit_t xbar [NP];
  always_comb begin
    for (int i = 0; i < NP; i++) q_pop[i] = 1'b0;
    for (int o = 0; o < NP; o++) begin
      send[o] = busy[o] && !q_empty[owner[o]] && (credit[o] != '0);
      xbar[o] = q_front[owner[o]];
      if (send[o]) q_pop[owner[o]] = 1'b1;
    end
  end

  flit_t sw_flit [NP];
  logic  sw_valid[NP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) begin
        busy[o] <= 1'b0; owner[o] <= '0; rr[o] <= '0;
        credit[o] <= CW'(BUF_DEPTH);
        sw_valid[o] <= 1'b0; sw_flit[o] <= '0;
        out_valid[o] <= 1'b0; out_flit[o] <= '0;
      end
      for (int i = 0; i < NP; i++) begin
        in_act[i] <= 1'b0; in_credit[i] <= 1'b0;
      end
    end else begin
      for (int o = 0; o < NP; o++) begin
        // allocation
        if (gnt_v[o]) begin
          busy[o]  <= 1'b1;
          owner[o] <= gnt_i[o];
          in_act[gnt_i[o]] <= 1'b1;
          rr[o]    <= PW'((int'(gnt_i[o]) + 1) % NP);
        end
        // switch traversal
        sw_valid[o] <= send[o];
        sw_flit[o]  <= xbar[o];
        if (send[o] && xbar[o].tail) begin
          busy[o] <= 1'b0;
          in_act[owner[o]] <= 1'b0;
        end
        // credits
        credit[o] <= credit[o] - (send[o] ? 1'b1 : 1'b0) + (out_credit[o] ? 1'b1 : 1'b0);
        // link stage
        out_valid[o] <= sw_valid[o];
        out_flit[o]  <= sw_flit[o];
      end
      for (int i = 0; i < NP; i++) in_credit[i] <= q_pop[i];
    end
  end

  // Credit-based flow control must never overrun a buffer
  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_credit_ok: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_valid[i] && q_full[i] && !q_pop[i]));
  end
  for (genvar o = 0; o < NP; o++) begin : g_chk_o
    a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
      int'(credit[o]) <= BUF_DEPTH);
  end
endmodule
