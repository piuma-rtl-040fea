// tb_mesh: the full 8 x 2 mesh. Checks the no-load latency of a corner-to-
// corner packet (4 cycles per router on a 9-router XY path) and then sends
// random 1/2/4-flit packets from every local port of every router to random
// routers and local ports at once; each must arrive whole, in flit order, at
// the router and port named in its header.
module tb_mesh;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NR = 16, NL = 6, BD = 8;

  flit_t li_f [NR][NL], lo_f [NR][NL];
  logic  li_v [NR][NL], li_c [NR][NL], lo_v [NR][NL], lo_c [NR][NL];
  mesh #(.MX(8), .MY(2), .NP(10), .BUF_DEPTH(BD)) dut (
    .clk, .rst_n, .loc_in_flit(li_f), .loc_in_valid(li_v), .loc_in_credit(li_c),
    .loc_out_flit(lo_f), .loc_out_valid(lo_v), .loc_out_credit(lo_c));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  flit_t sq [NR][NL][$];
  int    cred [NR][NL];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk)
    for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) begin
      li_v[r][l] = 0;
      if (rst_n && sq[r][l].size() > 0 && cred[r][l] > 0) begin
        li_f[r][l] = sq[r][l].pop_front(); li_v[r][l] = 1; cred[r][l]--;
      end
    end
  always @(posedge clk) if (rst_n)
    for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) if (li_c[r][l]) cred[r][l]++;

  int exp_r [int], exp_l [int], exp_len [int];
  int cur_id [NR][NL], cur_k [NR][NL];
  int got = 0, last_cyc = 0;
  always @(posedge clk)
    for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) begin
      lo_c[r][l] <= rst_n && lo_v[r][l];
      if (rst_n && lo_v[r][l]) begin
        if (lo_f[r][l].head) begin
          cur_id[r][l] = int'(lo_f[r][l].data[31:0]); cur_k[r][l] = 0;
          checks++;
          if (exp_r[cur_id[r][l]] != r || exp_l[cur_id[r][l]] != l) begin
            failures++;
            if (failures < 5) $display("pkt %0d at %0d/%0d", cur_id[r][l], r, l);
          end
        end else begin
          checks++;
          if (int'(lo_f[r][l].data[31:0]) != cur_id[r][l] || int'(lo_f[r][l].data[39:32]) != cur_k[r][l])
            failures++;
        end
        if (lo_f[r][l].tail) begin
          checks++;
          if (cur_k[r][l] + 1 != exp_len[cur_id[r][l]]) failures++;
          got++; last_cyc = cyc;
        end
        cur_k[r][l]++;
      end
    end

  int next_id = 1;
  task automatic queue_pkt(input int sr, sl, dr, dl, len);
    hdr_t h;
    flit_t f;
    int id;
    id = next_id++;
    h = '0; h.dst_router = 4'(dr); h.dst_port = 4'(4 + dl);
    h.len = (len == 1) ? LEN1 : (len == 2) ? LEN2 : LEN4;
    exp_r[id] = dr; exp_l[id] = dl; exp_len[id] = len;
    for (int k = 0; k < len; k++) begin
      f = '0; f.head = (k == 0); f.tail = (k == len - 1);
      f.data[31:0] = 32'(id); f.data[39:32] = 8'(k);
      if (k == 0) f.data[FLIT_W-1 -: HDR_W] = h;
      sq[sr][sl].push_back(f);
    end
  endtask

  initial begin
    int t0, sent;
    for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) begin
      cred[r][l] = BD; li_v[r][l] = 0; li_f[r][l] = '0; lo_c[r][l] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    queue_pkt(0, 0, 15, 0, 1);
    @(posedge clk); t0 = cyc;
    while (got == 0) @(posedge clk);
    checks++;
    if (last_cyc - t0 != 4 * 9) begin failures++; $display("corner latency %0d", last_cyc - t0); end
    sent = 1;
    for (int n = 0; n < 3000; n++) begin
      queue_pkt($urandom_range(0, NR - 1), $urandom_range(0, NL - 1), $urandom_range(0, NR - 1),
                $urandom_range(0, NL - 1), (n % 3 == 0) ? 1 : (n % 3 == 1) ? 2 : 4);
      sent++;
    end
    while (got < sent) @(posedge clk);
    $display("packets %0d", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
