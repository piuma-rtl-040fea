// tb_piuma_block: one PIUMA block with its two router ports looped back to
// each other, so the packets the core side sends arrive at the block's own
// target side and the answers come straight back. A behavioural DRAM sits
// behind the memory controller; the scratchpad is shrunk to 4 KB.
//
// Checked against a model kept in the testbench: random 8-byte reads and
// writes to DRAM and scratchpad, 64-byte lines, remote atomics (add, max,
// compare-and-swap) in both memories, an indirect load, an address outside
// every ATT rule, a DMA strided copy, queue push/pop, the block-level
// reduction over six cores, and the MTC schedulers and register files.
module tb_piuma_block;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NM = 4, NC = 6;

  logic        creq_valid, creq_ready, att_miss, cresp_valid, cresp_ready;
  creq_t       creq;
  pkt_t        cresp;
  logic        att_we, att_valid, att_mode;
  logic [1:0]  att_idx;
  logic [ADDR_W-1:0] att_base, att_size;
  logic [2:0]  att_blk;
  logic [5:0]  att_gran;
  region_e     att_region;
  logic [OFS_W-1:0] att_phys_base;
  logic        dma_valid, dma_ready, dma_done;
  logic [1:0]  dma_mode;
  logic [ADDR_W-1:0] dma_src, dma_dst, dma_idx, dma_base, dma_stride;
  logic [31:0] dma_count;
  logic        q_cfg_we, q_valid, q_ready, q_push, q_resp_valid, q_resp_ok;
  logic [1:0]  q_cfg_qid, q_qid;
  logic [ADDR_W-1:0] q_cfg_base;
  logic [15:0] q_cfg_cap;
  logic [63:0] q_data, q_resp_data;
  logic [1:0]  coll_op;
  logic [NC-1:0] coll_arrive;
  logic [63:0] coll_value [NC];
  logic        blk_arrive;
  logic [63:0] blk_value;
  logic [NM-1:0] mtc_stall, mtc_start, mtc_stop, mtc_complete, mtc_issue_valid;
  logic [3:0]  mtc_ctl_tid [NM], mtc_complete_tid [NM], mtc_issue_tid [NM];
  logic [4:0]  rf_rs0 [NM], rf_rs1 [NM];
  logic [63:0] rf_rd0 [NM], rf_rd1 [NM], rf_wd [NM];
  logic [NM-1:0] rf_we;
  logic [8:0]  rf_wa [NM];
  logic        dram_req_valid, dram_req_ready, dram_we, dram_rvalid;
  logic [31:0] dram_addr;
  logic [63:0] dram_wdata, dram_rdata;
  flit_t       r0_in_flit, r0_out_flit, r1_in_flit, r1_out_flit;
  logic        r0_in_valid, r0_in_credit, r0_out_valid, r0_out_credit;
  logic        r1_in_valid, r1_in_credit, r1_out_valid, r1_out_credit;

  // loopback: what the core side sends reaches the target side and back
  assign r1_out_flit  = r0_in_flit;
  assign r1_out_valid = r0_in_valid;
  assign r0_in_credit = r1_out_credit;
  assign r0_out_flit  = r1_in_flit;
  assign r0_out_valid = r1_in_valid;
  assign r1_in_credit = r0_out_credit;

  piuma_block #(.MY_BLOCK(3'd0), .SPAD_BYTES(4096)) dut (.*);
  dram_model #(.WORDS(4096), .LAT(4)) u_dram (
    .clk, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .we(dram_we),
    .addr(dram_addr), .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (200000) @(posedge clk);
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

  localparam longint SPAD_VA = 64'h1000_0000;
  task automatic access(input op_e op, input longint va, input logic [511:0] d,
                        input logic [63:0] aux, input logic [1:0] sh, output pkt_t r);
    @(negedge clk);
    creq = '{op: op, va: ADDR_W'(va), aux: aux, shift: sh, tag: 8'hA5, data: d};
    creq_valid = 1;
    @(posedge clk);
    while (!creq_ready) @(posedge clk);
    #1 creq_valid = 0;
    while (!(cresp_valid && cresp_ready)) @(posedge clk);
    r = cresp;
    #1;
  endtask

  logic [63:0] model [longint];
  // DRAM starts with the model's pattern; the scratchpad is written before it is read
  function automatic logic [63:0] rd_model(input longint va);
    int unsigned w;
    if (model.exists(va)) return model[va];
    w = int'(va >> 3) % 4096;
    return {16'hD0D0, 16'(w), 32'(w)};
  endfunction

  initial begin
    pkt_t r;
    creq_valid = 0; creq = '0; cresp_ready = 1;
    dma_valid = 0; dma_mode = 0; dma_src = 0; dma_dst = 0; dma_idx = 0; dma_base = 0;
    dma_stride = 0; dma_count = 0;
    q_cfg_we = 0; q_valid = 0; q_push = 0; q_cfg_qid = 0; q_qid = 0; q_cfg_base = 0;
    q_cfg_cap = 0; q_data = 0;
    coll_op = 0; coll_arrive = 0;
    for (int c = 0; c < NC; c++) coll_value[c] = 0;
    mtc_stall = 0; mtc_start = 0; mtc_stop = 0; mtc_complete = 0; rf_we = 0;
    for (int m = 0; m < NM; m++) begin
      mtc_ctl_tid[m] = 0; mtc_complete_tid[m] = 0; rf_rs0[m] = 0; rf_rs1[m] = 0;
      rf_wa[m] = 0; rf_wd[m] = 0;
    end
    att_we = 0; att_idx = 0; att_valid = 0; att_base = 0; att_size = 0; att_mode = 0;
    att_blk = 0; att_gran = 0; att_region = RG_DRAM; att_phys_base = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ATT: 32 KB of DRAM and 4 KB of scratchpad, both in this block
    @(negedge clk);
    att_we = 1; att_idx = 0; att_valid = 1; att_base = 0; att_size = 40'h8000; att_mode = 0;
    att_blk = 0; att_region = RG_DRAM;
    @(negedge clk);
    att_idx = 1; att_base = ADDR_W'(SPAD_VA); att_size = 40'h1000; att_region = RG_SPAD;
    @(negedge clk); att_we = 0;

    // scratchpad cleared through the network
    for (int i = 0; i < 512; i++) begin
      access(OP_WR8, SPAD_VA + 8 * i, 0, 0, 0, r);
      model[SPAD_VA + 8 * i] = 0;
    end
    // random 8-byte traffic
    for (int n = 0; n < 400; n++) begin
      longint va;
      logic [63:0] v;
      va = ($urandom_range(1) ? SPAD_VA + 8 * $urandom_range(511) : 8 * $urandom_range(4095));
      if ($urandom_range(1)) begin
        v = {$urandom, $urandom};
        access(OP_WR8, va, 512'(v), 0, 0, r);
        chk(r.hdr.op == OP_ACK && r.hdr.tag == 8'hA5, "write acknowledged");
        model[va] = v;
      end else begin
        access(OP_RD8, va, 0, 0, 0, r);
        chk(r.hdr.op == OP_RESP && r.hdr.len == LEN1 && r.data[63:0] == rd_model(va), "8-byte read");
      end
    end
    // lines in both memories
    for (int n = 0; n < 8; n++) begin
      logic [511:0] line;
      longint va;
      for (int k = 0; k < 8; k++) line[64*k +: 64] = {$urandom, $urandom};
      va = (n % 2) ? SPAD_VA + 64 * n : 64'h2000 + 64 * n;
      access(OP_WRLINE, va, line, 0, 0, r);
      chk(r.hdr.op == OP_ACK, "line write acknowledged");
      for (int k = 0; k < 8; k++) model[va + 8 * k] = line[64*k +: 64];
      access(OP_RDLINE, va, 0, 0, 0, r);
      chk(r.hdr.len == LEN4 && r.data == line, "line read back");
    end
    // atomics
    for (int n = 0; n < 60; n++) begin
      longint va;
      logic [63:0] opd, cmp, old, nw;
      atop_e op;
      va = ($urandom_range(1) ? SPAD_VA + 8 * $urandom_range(511) : 8 * $urandom_range(4095));
      case ($urandom_range(2))
        0: op = AT_ADD;
        1: op = AT_MAX;
        default: op = AT_CAS;
      endcase
      opd = {$urandom, $urandom};
      old = rd_model(va);
      cmp = $urandom_range(1) ? old : ~old;
      access(OP_ATOMIC, va, 512'(opd), {op, cmp[59:0]}, 0, r);
      chk(r.data[63:0] == old, "atomic returns the old value");
      case (op)
        AT_ADD:  nw = old + opd;
        AT_MAX:  nw = ($signed(opd) > $signed(old)) ? opd : old;
        default: nw = (old[59:0] == cmp[59:0] && old[63:60] == 4'd0) ? opd : old;
      endcase
      if (op == AT_CAS) nw = (old == {4'd0, cmp[59:0]}) ? opd : old;
      model[va] = nw;
      access(OP_RD8, va, 0, 0, 0, r);
      chk(r.data[63:0] == nw, "atomic result in memory");
    end
    // indirect load: B[0] at DRAM 0x100 holds 7, A at DRAM 0x1000
    access(OP_WR8, 64'h100, 512'd7, 0, 0, r);            model[64'h100] = 7;
    access(OP_WR8, 64'h1000 + 7 * 8, 512'h1D1D, 0, 0, r); model[64'h1000 + 56] = 64'h1D1D;
    access(OP_INDRD, 64'h100, 0, 64'({RG_DRAM, 3'd0, 35'h1000}), 2'd3, r);
    chk(r.hdr.op == OP_RESP && r.data[63:0] == 64'h1D1D, "indirect load");
    // no rule covers this address
    @(negedge clk);
    creq.va = 40'h50_0000_0000; creq.op = OP_RD8; creq_valid = 1;
    #1 chk(att_miss && creq_ready, "ATT miss flagged and dropped");
    @(negedge clk); creq_valid = 0;
    #1 chk(!att_miss, "ATT miss only with a request");

    // DMA strided copy of 6 words, stride 24 bytes, inside the scratchpad
    @(negedge clk);
    dma_valid = 1; dma_mode = 0; dma_src = {RG_SPAD, 3'd0, 35'd0}; dma_stride = 24;
    dma_dst = {RG_SPAD, 3'd0, 35'd2048}; dma_count = 6;
    @(negedge clk); dma_valid = 0;
    while (!dma_done) @(posedge clk);
    for (int i = 0; i < 6; i++) begin
      access(OP_RD8, SPAD_VA + 2048 + 8 * i, 0, 0, 0, r);
      chk(r.data[63:0] == rd_model(SPAD_VA + 24 * i), "DMA strided copy");
    end
    // queue: push 3 into a queue of 2, pop 3
    @(negedge clk); q_cfg_we = 1; q_cfg_qid = 2; q_cfg_base = {RG_SPAD, 3'd0, 35'd3072}; q_cfg_cap = 2;
    @(negedge clk); q_cfg_we = 0;
    for (int n = 0; n < 6; n++) begin
      @(negedge clk); q_valid = 1; q_push = (n < 3); q_qid = 2; q_data = 64'(n + 40);
      @(negedge clk); q_valid = 0;
      while (!q_resp_valid) @(posedge clk);
      if (n < 3) chk(q_resp_ok == (n < 2), "queue push");
      else chk(q_resp_ok == (n < 5) && (n == 5 || q_resp_data == 64'(n + 37)), "queue pop");
    end
    // block reduction: max over six cores, arriving one at a time
    coll_op = 2;
    for (int c = 0; c < NC; c++) coll_value[c] = 64'($urandom_range(1000));
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); coll_arrive = NC'(1) << c;
      #1 if (c < NC - 1) chk(!blk_arrive, "no early block arrival");
    end
    @(negedge clk); coll_arrive = 0;
    begin
      longint mx;
      bit seen;
      mx = 0; seen = 0;
      for (int c = 0; c < NC; c++) if (coll_value[c] > mx) mx = coll_value[c];
      repeat (3) begin
        #1 if (blk_arrive) begin seen = 1; chk(blk_value == 64'(mx), "block max"); end
        @(negedge clk);
      end
      chk(seen, "block arrival after six cores");
    end
    // register file of MTC 2: thread 5, register 9
    @(negedge clk); rf_we = 4'b0100; rf_wa[2] = {4'd5, 5'd9}; rf_wd[2] = 64'hFEED;
    @(negedge clk); rf_we = 0;
    mtc_start = 4'b0100; mtc_ctl_tid[2] = 4'd5; mtc_stall = 4'b0100;
    @(negedge clk); mtc_start = 0; mtc_stall = 0; rf_rs0[2] = 5'd9;
    begin
      bit seen;
      seen = 0;
      repeat (4) begin
        @(posedge clk); #1;
        if (mtc_issue_valid[2] && mtc_issue_tid[2] == 4'd5) seen = 1;
      end
      chk(seen, "MTC issues the started thread");
      @(posedge clk); #1;
      chk(rf_rd0[2] == 64'hFEED, "register read for the issuing thread");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
