// tb_net_tx: network interface, sender side: packets of every length go through net_tx and a 2-cycle link into net_rx; checks that each is cut into the right number of flits with head/tail marks, that the payload survives, and that the sender waits when it has no credit.
module tb_net_tx;
  import piuma_pkg::*;
  int checks = 0, failures = 0, credit_stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  pkt_valid, pkt_ready, rx_valid, rx_ready, credit, fv, fv_d1, fv_d2;
  pkt_t  pkt, rx_pkt;
  flit_t fl, fl_d1, fl_d2;

  net_tx #(.CREDITS(8)) u_tx (.clk, .rst_n, .pkt_valid, .pkt_ready, .pkt,
                              .flit(fl), .flit_valid(fv), .in_credit(credit));
  // two-cycle link
  always_ff @(posedge clk) begin
    fl_d1 <= fl; fv_d1 <= fv && rst_n; fl_d2 <= fl_d1; fv_d2 <= fv_d1 && rst_n;
  end
  net_rx #(.DEPTH(8)) u_rx (.clk, .rst_n, .flit(fl_d2), .flit_valid(fv_d2), .out_credit(credit),
                            .pkt_valid(rx_valid), .pkt_ready(rx_ready), .pkt(rx_pkt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pkt_t sent [$];
  int nsent = 0, nrecv = 0, heads = 0, tails = 0, flits = 0, exp_flits = 0;

  // flit-level monitor on the sender side
  always @(posedge clk) if (rst_n && fv) begin
    flits++;
    if (fl.head) heads++;
    if (fl.tail) tails++;
  end
  always @(posedge clk) if (rst_n && pkt_valid && !fv) credit_stalls++;

  // receiver with random back-pressure
  always @(negedge clk) rx_ready = ($urandom_range(0, 9) < 8);
  always @(posedge clk) if (rst_n && rx_valid && rx_ready) begin
    pkt_t e;
    int nb;
    e = sent.pop_front();
    nb = (e.hdr.len == LEN1) ? 64 : (e.hdr.len == LEN2) ? 128 : 512;
    checks++;
    if (rx_pkt.hdr !== e.hdr || (rx_pkt.data & ((512'd1 << nb) - 1)) !== (e.data & ((512'd1 << nb) - 1))) begin
      failures++;
      if (failures < 4) $display("packet %0d mismatch", nrecv);
    end
    nrecv++;
  end

  initial begin
    pkt_valid = 0; pkt = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      pkt_t p;
      int t0;
      p = '0;
      p.hdr.len  = plen_e'(n % 3);
      p.hdr.op   = op_e'($urandom_range(0, 5));
      p.hdr.addr = {$urandom, $urandom};
      p.hdr.aux  = {$urandom, $urandom};
      p.hdr.tag  = 8'(n);
      for (int k = 0; k < 16; k++) p.data[32*k +: 32] = $urandom;
      exp_flits += len_flits(p.hdr.len);
      @(negedge clk);
      pkt = p; pkt_valid = 1; sent.push_back(p); nsent++;
      t0 = 0;
      @(posedge clk);
      while (!pkt_ready) begin t0++; @(posedge clk); end
      #1 pkt_valid = 0;
    end
    while (nrecv < nsent) @(posedge clk);
    checks += 3;
    if (flits != exp_flits) failures++;
    if (heads != nsent || tails != nsent) failures++;
    if (8 < 5 && credit_stalls == 0) failures++;
    $display("packets %0d flits %0d credit stalls %0d", nrecv, flits, credit_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
