// tb_router: one router at (3,0). Checks (1) the 4-cycle no-load latency from
// an input to the next hop, (2) random 1/2/4-flit packets from all ports to
// all destinations: each arrives whole, on the XY output, flits contiguous
// and in order, (3) virtual cut-through: with only two downstream credits a
// 4-flit packet is held back entirely, and it leaves once credits return.
module tb_router;
  import piuma_pkg::*;
  int checks = 0, failures = 0, vct_holds = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NP = 10, BD = 8;
  localparam logic [2:0] MX = 3'd3;

  flit_t in_flit [NP], out_flit [NP];
  logic in_valid [NP], in_credit [NP], out_valid [NP], out_credit [NP];
  router #(.NP(NP), .BUF_DEPTH(BD), .MY_X(MX), .MY_Y(1'b0)) dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- senders ----------------
  flit_t sq [NP][$];
  int    cred [NP];
  always @(negedge clk) begin
    for (int i = 0; i < NP; i++) begin
      in_valid[i] = 0;
      if (rst_n && sq[i].size() > 0 && cred[i] > 0) begin
        in_flit[i] = sq[i].pop_front(); in_valid[i] = 1; cred[i]--;
      end
    end
  end
  always @(posedge clk) if (rst_n) for (int i = 0; i < NP; i++) if (in_credit[i]) cred[i]++;

  // ---------------- receivers ----------------
  bit    hold [NP];             // withhold credits on this output
  int    held [NP];
  int    exp_port [int];        // packet id -> output port
  int    exp_len  [int];
  int    cur_id [NP], cur_k [NP];
  int    got = 0;
  int    last_arrival_cycle = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    for (int o = 0; o < NP; o++) begin
      out_credit[o] <= 0;
      if (!hold[o] && held[o] > 0) begin out_credit[o] <= 1; held[o]--; end
      if (rst_n && out_valid[o]) begin
        if (hold[o]) held[o]++; else out_credit[o] <= 1;
        if (out_flit[o].head) begin
          hdr_t h;
          h = hdr_t'(out_flit[o].data[FLIT_W-1 -: HDR_W]);
          cur_id[o] = int'(out_flit[o].data[31:0]);
          cur_k[o]  = 0;
          checks++;
          if (!exp_port.exists(cur_id[o]) || exp_port[cur_id[o]] != o) begin
            failures++; $display("packet %0d on wrong port %0d", cur_id[o], o);
          end
        end else begin
          checks++;
          if (int'(out_flit[o].data[31:0]) != cur_id[o] || int'(out_flit[o].data[39:32]) != cur_k[o]) begin
            failures++; $display("body flit mismatch on port %0d", o);
          end
        end
        if (out_flit[o].tail) begin
          checks++;
          if (cur_k[o] + 1 != exp_len[cur_id[o]]) failures++;
          got++;
          last_arrival_cycle = cyc;
        end
        cur_k[o]++;
      end
    end
  end

  function automatic int xy_port(input logic [3:0] dr, input logic [3:0] dp);
    if (dr[2:0] > MX) return P_E;
    if (dr[2:0] < MX) return P_W;
    if (dr[3])        return P_S;
    return int'(dp);
  endfunction

  int next_id = 1;
  task automatic queue_pkt(input int i, input logic [3:0] dr, input logic [3:0] dp, input int len);
    hdr_t h;
    flit_t f;
    int id;
    id = next_id++;
    h = '0; h.dst_router = dr; h.dst_port = dp;
    h.len = (len == 1) ? LEN1 : (len == 2) ? LEN2 : LEN4;
    exp_port[id] = xy_port(dr, dp);
    exp_len[id] = len;
    for (int k = 0; k < len; k++) begin
      f = '0;
      f.head = (k == 0); f.tail = (k == len - 1);
      f.data[31:0] = 32'(id); f.data[39:32] = 8'(k);
      if (k == 0) f.data[FLIT_W-1 -: HDR_W] = h;
      sq[i].push_back(f);
    end
  endtask

  initial begin
    int t0, t1, sent;
    for (int i = 0; i < NP; i++) begin
      in_valid[i] = 0; in_flit[i] = '0; cred[i] = BD; hold[i] = 0; held[i] = 0; out_credit[i] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // (1) no-load latency: port 4 -> router (5,0) leaves on E
    @(negedge clk);
    queue_pkt(4, 4'd5, 4'd4, 1);
    @(posedge clk); t0 = cyc;               // the edge where the router samples the flit
    while (got == 0) @(posedge clk);
    t1 = last_arrival_cycle;
    checks++;
    if (t1 - t0 != 4) begin failures++; $display("no-load latency %0d", t1 - t0); end
    // (2) random traffic from every port (mesh edge ports included)
    sent = 1;
    for (int n = 0; n < 600; n++) begin
      int i, len, dp;
      logic [3:0] dr;
      i = $urandom_range(0, NP - 1);
      dr = {1'($urandom_range(0, 1)), 3'($urandom_range(0, 7))};
      dp = $urandom_range(4, NP - 1);
      // an input never sends back where it came from in XY order
      if (i == P_E && dr[2:0] >= MX) dr[2:0] = 3'd0;
      if (i == P_W && dr[2:0] <= MX) dr[2:0] = 3'd7;
      len = (n % 3 == 0) ? 1 : (n % 3 == 1) ? 2 : 4;
      queue_pkt(i, dr, 4'(dp), len);
      sent++;
      if (n % 50 == 0) @(negedge clk);
    end
    while (got < sent) @(posedge clk);
    // (3) virtual cut-through: hold credits on E, fill 6 of 8 entries, then a 4-flit packet
    hold[P_E] = 1;
    for (int k = 0; k < 3; k++) begin queue_pkt(4, 4'd6, 4'd4, 2); sent++; end
    while (got < sent) @(posedge clk);
    queue_pkt(4, 4'd6, 4'd4, 4); sent++;
    repeat (40) @(posedge clk);
    checks++;
    if (got != sent - 1 || cur_k[P_E] != 2) failures++;   // nothing of the 4-flit packet left
    else vct_holds++;
    hold[P_E] = 0;                                        // credits flow back
    while (got < sent) @(posedge clk);
    checks++;
    if (vct_holds == 0) failures++;
    $display("packets %0d vct holds %0d", got, vct_holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
