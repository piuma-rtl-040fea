// tb_piuma_socket: end-to-end test of one PIUMA socket at its full default
// size (eight blocks with 4 MB scratchpads each, sixteen routers), with a
// behavioural DRAM behind each memory controller.
//
// Software view used here: application addresses 0..1 MB are DRAM, spread
// over the eight memory controllers in 256-byte chunks; addresses from
// 0x1000_0000 are scratchpad, 64 KB per block. The test plays the role of the
// cores and checks every answer against a model kept in the testbench:
//   - 8-byte reads and writes from all blocks at once to all blocks' DRAM
//   - 64-byte line writes and reads
//   - remote atomic adds from all blocks to one scratchpad word
//   - indirect loads A[B[i]] with A next to B, and with A in another block
//     (forwarded from controller to controller)
//   - DMA gather, strided copy and scatter, queue push/pop up to full/empty
//   - a barrier-sum over all 48 cores, a shadow-tag write invalidation,
//     MTC thread issue with one instruction in flight per thread
//   - an address no ATT rule covers, and response back-pressure that fills
//     the network buffers
// Each of those mechanisms is counted; one that never happened is a failure.
module tb_piuma_socket;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NB = 8, NR = 16, NE = 5, NC = 6, NM = 4;

  logic        creq_valid [NB], creq_ready [NB], att_miss [NB], cresp_valid [NB], cresp_ready [NB];
  creq_t       creq [NB];
  pkt_t        cresp [NB];
  logic        att_we, att_valid, att_mode;
  logic [1:0]  att_idx;
  logic [ADDR_W-1:0] att_base, att_size;
  logic [2:0]  att_blk;
  logic [5:0]  att_gran;
  region_e     att_region;
  logic [OFS_W-1:0] att_phys_base;
  logic        dma_valid [NB], dma_ready [NB], dma_done [NB];
  logic [1:0]  dma_mode [NB];
  logic [ADDR_W-1:0] dma_src [NB], dma_dst [NB], dma_idx [NB], dma_base [NB], dma_stride [NB];
  logic [31:0] dma_count [NB];
  logic        q_cfg_we [NB], q_valid [NB], q_ready [NB], q_push [NB], q_resp_valid [NB], q_resp_ok [NB];
  logic [1:0]  q_cfg_qid [NB], q_qid [NB];
  logic [ADDR_W-1:0] q_cfg_base [NB];
  logic [15:0] q_cfg_cap [NB];
  logic [63:0] q_data [NB], q_resp_data [NB];
  logic [1:0]  coll_op;
  logic [NC-1:0] coll_arrive [NB];
  logic [63:0] coll_value [NB][NC];
  logic        coll_release;
  logic [63:0] coll_result;
  logic [NM-1:0] mtc_stall [NB], mtc_start [NB], mtc_stop [NB], mtc_complete [NB], mtc_issue_valid [NB];
  logic [3:0]  mtc_ctl_tid [NB][NM], mtc_complete_tid [NB][NM], mtc_issue_tid [NB][NM];
  logic [4:0]  rf_rs0 [NB][NM], rf_rs1 [NB][NM];
  logic [63:0] rf_rd0 [NB][NM], rf_rd1 [NB][NM], rf_wd [NB][NM];
  logic [NM-1:0] rf_we [NB];
  logic [8:0]  rf_wa [NB][NM];
  logic        st_req_valid, st_resp_valid, st_resp_err;
  logic [5:0]  st_req_cache, st_req_line;
  cevent_e     st_req_ev;
  cstate_e     st_resp_state;
  logic [47:0] st_resp_inval;
  logic        dram_req_valid [NB], dram_req_ready [NB], dram_we [NB], dram_rvalid [NB];
  logic [31:0] dram_addr [NB];
  logic [63:0] dram_wdata [NB], dram_rdata [NB];
  flit_t       ext_in_flit [NR][NE], ext_out_flit [NR][NE];
  logic        ext_in_valid [NR][NE], ext_in_credit [NR][NE], ext_out_valid [NR][NE], ext_out_credit [NR][NE];

  piuma_socket dut (.*);

  for (genvar b = 0; b < NB; b++) begin : g_dram
    dram_model #(.WORDS(4096), .LAT(6)) u_dram (
      .clk, .req_valid(dram_req_valid[b]), .req_ready(dram_req_ready[b]), .we(dram_we[b]),
      .addr(dram_addr[b]), .wdata(dram_wdata[b]), .rvalid(dram_rvalid[b]), .rdata(dram_rdata[b]));
  end

  // ---------------- mechanism counters ----------------
  int n_remote = 0, n_local = 0, n_line = 0, n_atomic = 0, n_ind_local = 0, n_ind_fwd = 0;
  int n_dma = 0, n_q_full = 0, n_q_empty = 0, n_coll = 0, n_inval = 0, n_mtc_issue = 0;
  int n_att_miss = 0, n_backpressure = 0, n_vct_wait = 0;
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.g_blk[0].u_blk.u_rx0.full) n_backpressure++;
  end
  // a router holding a head flit back because the downstream credits do not cover its packet
  for (genvar r = 0; r < NR; r++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      for (int o = 0; o < 10; o++)
        if (!dut.u_mesh.g_y[r / 8].g_x[r % 8].u_r.busy[o] &&
            dut.u_mesh.g_y[r / 8].g_x[r % 8].u_r.want[o] != 0 &&
            !dut.u_mesh.g_y[r / 8].g_x[r % 8].u_r.gnt_v[o]) n_vct_wait++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- address map used by the test ----------------
  localparam longint SPAD_VA = 64'h1000_0000;
  function automatic logic [ADDR_W-1:0] dram_pa(input longint va);
    return {RG_DRAM, 3'((va >> 8) % 8), OFS_W'(((va >> 11) << 8) | (va & 255))};
  endfunction
  function automatic logic [ADDR_W-1:0] spad_pa(input int b, input longint ofs);
    return {RG_SPAD, 3'(b), OFS_W'(ofs)};
  endfunction

  // ---------------- core-side access from block b ----------------
  task automatic access(input int b, input op_e op, input longint va, input logic [511:0] d,
                        input logic [63:0] aux, input logic [1:0] sh, output pkt_t r);
    @(negedge clk);
    creq[b] = '{op: op, va: ADDR_W'(va), aux: aux, shift: sh, tag: 8'(b), data: d};
    creq_valid[b] = 1;
    @(posedge clk);
    while (!creq_ready[b]) @(posedge clk);
    #1 creq_valid[b] = 0;
    while (!(cresp_valid[b] && cresp_ready[b])) @(posedge clk);
    r = cresp[b];
    #1;
  endtask

  logic [63:0] model [longint];
  function automatic logic [63:0] dram_init(input longint va);
    logic [ADDR_W-1:0] p;
    int unsigned w;
    p = dram_pa(va);
    w = int'(p[34:3]) % 4096;
    return {16'hD0D0, 16'(w), 32'(w)};
  endfunction

  initial begin
    pkt_t r;
    // idle all inputs
    for (int b = 0; b < NB; b++) begin
      creq_valid[b] = 0; creq[b] = '0; cresp_ready[b] = 1;
      dma_valid[b] = 0; dma_mode[b] = 0; dma_src[b] = 0; dma_dst[b] = 0; dma_idx[b] = 0;
      dma_base[b] = 0; dma_stride[b] = 0; dma_count[b] = 0;
      q_cfg_we[b] = 0; q_valid[b] = 0; q_push[b] = 0; q_cfg_qid[b] = 0; q_qid[b] = 0;
      q_cfg_base[b] = 0; q_cfg_cap[b] = 0; q_data[b] = 0;
      coll_arrive[b] = 0; mtc_stall[b] = 0; mtc_start[b] = 0; mtc_stop[b] = 0;
      mtc_complete[b] = 0; rf_we[b] = 0;
      for (int c = 0; c < NC; c++) coll_value[b][c] = 0;
      for (int m = 0; m < NM; m++) begin
        mtc_ctl_tid[b][m] = 0; mtc_complete_tid[b][m] = 0; rf_rs0[b][m] = 0; rf_rs1[b][m] = 0;
        rf_wa[b][m] = 0; rf_wd[b][m] = 0;
      end
    end
    for (int r2 = 0; r2 < NR; r2++) for (int e = 0; e < NE; e++) begin
      ext_in_flit[r2][e] = '0; ext_in_valid[r2][e] = 0; ext_out_credit[r2][e] = 0;
    end
    coll_op = 0; st_req_valid = 0; st_req_cache = 0; st_req_line = 0; st_req_ev = EV_RD;
    att_we = 0; att_idx = 0; att_valid = 0; att_base = 0; att_size = 0; att_mode = 0;
    att_blk = 0; att_gran = 0; att_region = RG_DRAM; att_phys_base = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ATT: rule 0 DRAM interleaved, rule 1 SPAD interleaved in 64 KB chunks
    @(negedge clk);
    att_we = 1; att_idx = 0; att_valid = 1; att_base = 0; att_size = 40'h10_0000; att_mode = 1;
    att_gran = 8; att_region = RG_DRAM; att_phys_base = 0;
    @(negedge clk);
    att_idx = 1; att_base = ADDR_W'(SPAD_VA); att_size = 40'h8_0000; att_gran = 16; att_region = RG_SPAD;
    @(negedge clk); att_we = 0;

    // ---- 1. all blocks at once: 8-byte writes and reads across the socket ----
    for (int b = 0; b < NB; b++) begin
      automatic int bb = b;
      fork begin
        for (int n = 0; n < 24; n++) begin
          automatic longint va;
          automatic logic [63:0] v;
          automatic pkt_t rr;
          va = longint'(bb) * 8 + longint'(n) * 64 * 8 + 64'h400;   // disjoint per block
          v = {$urandom, $urandom};
          access(bb, OP_WR8, va, 512'(v), 0, 0, rr);
          chk(rr.hdr.op == OP_ACK, "write ack");
          model[va] = v;
          if (3'((va >> 8) % 8) == 3'(bb)) n_local++; else n_remote++;
        end
        for (int n = 0; n < 24; n++) begin
          automatic longint va;
          automatic pkt_t rr;
          va = longint'(bb) * 8 + longint'(n) * 64 * 8 + 64'h400;
          access(bb, OP_RD8, va, 0, 0, 0, rr);
          chk(rr.hdr.op == OP_RESP && rr.data[63:0] == model[va], "8-byte read back");
          if (rr.data[63:0] != model[va] && failures < 4) $display("va %h got %h op %0d exp %h", va, rr.data[63:0], rr.hdr.op, model[va]);
        end
      end join_none
    end
    wait fork;

    // ---- 2. line accesses ----
    for (int n = 0; n < 8; n++) begin
      logic [511:0] line;
      longint va;
      for (int k = 0; k < 8; k++) line[64*k +: 64] = {$urandom, $urandom};
      va = 64'h8000 + longint'(n) * 256;          // one line per controller
      access(n % NB, OP_WRLINE, va, line, 0, 0, r);
      chk(r.hdr.op == OP_ACK, "line write ack");
      access((n + 3) % NB, OP_RDLINE, va, 0, 0, 0, r);
      chk(r.hdr.len == LEN4 && r.data == line, "line read back");
      n_line++;
    end

    // ---- 3. remote atomics: every block adds to one scratchpad word of block 6 ----
    access(0, OP_WR8, SPAD_VA + 6 * 65536 + 64, 512'd1000, 0, 0, r);
    for (int b = 0; b < NB; b++) begin
      automatic int bb = b;
      fork begin
        automatic pkt_t rr;
        for (int n = 0; n < 10; n++) begin
          access(bb, OP_ATOMIC, SPAD_VA + 6 * 65536 + 64, 512'(bb + 1), {AT_ADD, 60'd0}, 0, rr);
          n_atomic++;
        end
      end join_none
    end
    wait fork;
    access(2, OP_RD8, SPAD_VA + 6 * 65536 + 64, 0, 0, 0, r);
    chk(r.data[63:0] == 64'(1000 + 10 * 36), "atomic sum");

    // ---- 4. indirect loads ----
    // B[0] at va 0x0 (controller 0) holds 5. A at va 0x20 (also controller 0): A[5] local.
    access(3, OP_WR8, 64'h0, 512'd5, 0, 0, r);
    access(3, OP_WR8, 64'h20 + 5 * 8, 512'hABCD, 0, 0, r);
    access(4, OP_INDRD, 64'h0, 0, 64'(dram_pa(64'h20)), 2'd3, r);
    chk(r.hdr.op == OP_RESP && r.data[63:0] == 64'hABCD, "indirect load, A and B together");
    n_ind_local++;
    // A in block 5's scratchpad: controller 0 forwards the read to block 5, answer comes to block 4
    access(1, OP_WR8, SPAD_VA + 5 * 65536 + 128 + 5 * 8, 512'h5151, 0, 0, r);
    access(4, OP_INDRD, 64'h0, 0, 64'(spad_pa(5, 128)), 2'd3, r);
    chk(r.hdr.op == OP_RESP && r.data[63:0] == 64'h5151, "indirect load forwarded");
    chk(r.hdr.src_router == blk_router(3'd5, 1'b1), "forwarded answer comes from the owner of A");
    n_ind_fwd++;

    // ---- 5. DMA gather and scatter in block 3's scratchpad ----
    for (int i = 0; i < 8; i++) begin
      access(3, OP_WR8, SPAD_VA + 3 * 65536 + 8 * (100 + i), 512'((i * 5) % 8), 0, 0, r);  // index list
      access(3, OP_WR8, SPAD_VA + 3 * 65536 + 8 * (200 + i), 512'(64'h700 + i), 0, 0, r); // data
    end
    @(negedge clk);
    dma_valid[3] = 1; dma_mode[3] = 2'd1; dma_idx[3] = spad_pa(3, 8 * 100);
    dma_base[3] = spad_pa(3, 8 * 200); dma_dst[3] = spad_pa(3, 8 * 300); dma_count[3] = 8;
    @(negedge clk); dma_valid[3] = 0;
    while (!dma_done[3]) @(posedge clk);
    n_dma++;
    for (int i = 0; i < 8; i++) begin
      access(7, OP_RD8, SPAD_VA + 3 * 65536 + 8 * (300 + i), 0, 0, 0, r);
      chk(r.data[63:0] == 64'h700 + 64'((i * 5) % 8), "DMA gather result");
    end
    @(negedge clk);
    dma_valid[3] = 1; dma_mode[3] = 2'd2; dma_src[3] = spad_pa(3, 8 * 200);
    dma_idx[3] = spad_pa(3, 8 * 100); dma_base[3] = spad_pa(3, 8 * 400); dma_count[3] = 8;
    @(negedge clk); dma_valid[3] = 0;
    while (!dma_done[3]) @(posedge clk);
    n_dma++;
    for (int i = 0; i < 8; i++) begin
      access(0, OP_RD8, SPAD_VA + 3 * 65536 + 8 * (400 + (i * 5) % 8), 0, 0, 0, r);
      chk(r.data[63:0] == 64'h700 + 64'(i), "DMA scatter result");
    end

    // ---- 6. queue engine in block 4: fill to capacity, overflow, drain, underflow ----
    @(negedge clk);
    q_cfg_we[4] = 1; q_cfg_qid[4] = 1; q_cfg_base[4] = spad_pa(4, 4096); q_cfg_cap[4] = 4;
    @(negedge clk); q_cfg_we[4] = 0;
    for (int n = 0; n < 6; n++) begin
      @(negedge clk); q_valid[4] = 1; q_push[4] = 1; q_qid[4] = 1; q_data[4] = 64'(100 + n);
      @(negedge clk); q_valid[4] = 0;
      while (!q_resp_valid[4]) @(posedge clk);
      chk(q_resp_ok[4] == (n < 4), "queue push status");
      if (!q_resp_ok[4]) n_q_full++;
    end
    for (int n = 0; n < 6; n++) begin
      @(negedge clk); q_valid[4] = 1; q_push[4] = 0;
      @(negedge clk); q_valid[4] = 0;
      while (!q_resp_valid[4]) @(posedge clk);
      chk(q_resp_ok[4] == (n < 4) && (n >= 4 || q_resp_data[4] == 64'(100 + n)), "queue pop");
      if (!q_resp_ok[4]) n_q_empty++;
    end

    // ---- 7. barrier with sum over all 48 cores ----
    coll_op = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++) coll_value[b][c] = 64'(b * 10 + c);
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) coll_arrive[b] = NC'(1) << c;
    end
    @(negedge clk);
    for (int b = 0; b < NB; b++) coll_arrive[b] = 0;
    while (!coll_release) @(posedge clk);
    chk(coll_result == 64'(NC * 280 + NB * 15), "barrier sum over 48 cores");
    n_coll++;

    // ---- 8. coherence directory: two readers, then a writer invalidates the other ----
    @(negedge clk); st_req_valid = 1; st_req_cache = 3; st_req_line = 9; st_req_ev = EV_RD;
    @(negedge clk); chk(st_resp_state == ST_E, "first reader gets E");
    st_req_cache = 17;
    @(negedge clk); chk(st_resp_state == ST_S, "second reader gets S");
    st_req_ev = EV_WR;
    @(negedge clk); chk(st_resp_state == ST_M && st_resp_inval[3], "writer gets M, first reader invalidated");
    if (st_resp_inval[3]) n_inval++;
    st_req_valid = 0;

    // ---- 9. MTC: two threads of block 2 core 1, one instruction in flight each ----
    @(negedge clk); mtc_start[2] = 4'b0010; mtc_ctl_tid[2][1] = 4'd3;
    @(negedge clk); mtc_ctl_tid[2][1] = 4'd9;
    @(negedge clk); mtc_start[2] = 0;
    repeat (4) @(posedge clk);
    #1;
    chk(!mtc_issue_valid[2][1], "no issue while both threads have an instruction in flight");
    @(negedge clk); mtc_complete[2] = 4'b0010; mtc_complete_tid[2][1] = 4'd3;
    @(negedge clk); mtc_complete[2] = 0;
    begin
      bit seen3;
      seen3 = 0;
      repeat (4) begin
        @(posedge clk); #1;
        if (mtc_issue_valid[2][1] && mtc_issue_tid[2][1] == 4'd3) seen3 = 1;
      end
      chk(seen3, "thread reissued after completion");
    end
    n_mtc_issue++;

    // ---- 10. address outside every ATT rule ----
    @(negedge clk);
    creq[5] = '0; creq[5].op = OP_RD8; creq[5].va = 40'h80_0000_0000; creq_valid[5] = 1;
    #1;
    chk(att_miss[5] && creq_ready[5], "untranslatable address flagged");
    if (att_miss[5]) n_att_miss++;
    @(negedge clk); creq_valid[5] = 0;

    // ---- 11. back-pressure: block 0 stops taking responses to many reads ----
    cresp_ready[0] = 0;
    for (int b = 1; b < NB; b++) begin
      // the other blocks write block 0's responses' source words meanwhile
    end
    fork
      begin
        for (int n = 0; n < 12; n++) begin
          @(negedge clk);
          creq[0] = '{op: OP_RDLINE, va: ADDR_W'(64'h8000 + (n % 8) * 256), aux: 0, shift: 0, tag: 8'(n), data: 0};
          creq_valid[0] = 1;
          @(posedge clk);
          while (!creq_ready[0]) @(posedge clk);
          #1 creq_valid[0] = 0;
        end
      end
      begin
        repeat (400) @(posedge clk);
        @(negedge clk) cresp_ready[0] = 1;
      end
    join
    begin
      int got;
      got = 0;
      while (got < 12) begin
        @(posedge clk);
        if (cresp_valid[0] && cresp_ready[0]) begin
          got++;
          chk(cresp[0].hdr.len == LEN4, "back-pressured line response");
        end
      end
    end

    // ---- mechanism coverage ----
    $display("local %0d remote %0d line %0d atomic %0d ind_local %0d ind_fwd %0d dma %0d",
             n_local, n_remote, n_line, n_atomic, n_ind_local, n_ind_fwd, n_dma);
    $display("q_full %0d q_empty %0d coll %0d inval %0d mtc %0d att_miss %0d backpressure %0d vct_wait %0d",
             n_q_full, n_q_empty, n_coll, n_inval, n_mtc_issue, n_att_miss, n_backpressure, n_vct_wait);
    chk(n_local > 0, "local access seen");          chk(n_remote > 0, "remote access seen");
    chk(n_line > 0, "line access seen");            chk(n_atomic > 0, "remote atomic seen");
    chk(n_ind_local > 0, "local indirect seen");    chk(n_ind_fwd > 0, "forwarded indirect seen");
    chk(n_dma > 0, "DMA seen");                     chk(n_q_full > 0, "queue full seen");
    chk(n_q_empty > 0, "queue empty seen");         chk(n_coll > 0, "collective seen");
    chk(n_inval > 0, "invalidation seen");          chk(n_mtc_issue > 0, "thread issue seen");
    chk(n_att_miss > 0, "ATT miss seen");           chk(n_backpressure > 0, "buffer full seen");
    chk(n_vct_wait > 0, "cut-through credit wait seen");
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
