// tb_mem_ctrl: drives request packets into a memory controller (block 2) in
// front of a behavioural DRAM and checks the responses: 8-byte and 64-byte
// reads and writes, a remote atomic, an indirect load resolved locally (two
// DRAM reads, one answer to the requester) and one handed to another block
// (a new read request addressed to that block, still naming the requester).
module tb_mem_ctrl;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, out_valid, out_ready;
  pkt_t req, out_pkt;
  logic dram_req_valid, dram_req_ready, dram_we, dram_rvalid;
  logic [31:0] dram_addr;
  logic [63:0] dram_wdata, dram_rdata;

  localparam logic [2:0] BLK = 3'd2;
  mem_ctrl #(.MY_BLOCK(BLK), .MY_ROUTER(blk_router(BLK, 1'b1))) dut (.*);
  dram_model #(.WORDS(4096), .LAT(4)) u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] pa(input logic [2:0] b, input int unsigned ofs);
    return {RG_DRAM, b, OFS_W'(ofs)};
  endfunction
  function automatic logic [63:0] init_word(input int unsigned w);
    return {16'hD0D0, 16'(w), 32'(w)};
  endfunction

  task automatic send(input op_e op, input logic [ADDR_W-1:0] a, input logic [511:0] d,
                      input logic [63:0] aux, input logic [1:0] sh, output pkt_t r);
    @(negedge clk);
    req = '0;
    req.hdr.op = op; req.hdr.addr = a; req.hdr.aux = aux; req.hdr.shift = sh;
    req.hdr.src_router = 4'd9; req.hdr.src_port = 4'd4; req.hdr.tag = 8'($urandom);
    req.hdr.len = (op == OP_WRLINE) ? LEN4 : LEN1;
    req.data = d;
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!out_valid) @(negedge clk);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    r = out_pkt;
    out_ready = 1; @(negedge clk); out_ready = 0;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    pkt_t r;
    logic [511:0] line;
    req_valid = 0; out_ready = 0; req = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 8-byte write then read
    send(OP_WR8, pa(BLK, 8 * 100), 512'h1234_5678_9abc_def0, 0, 0, r);
    chk(r.hdr.op == OP_ACK && r.hdr.dst_router == 4'd9 && r.hdr.dst_port == 4'd4, "wr8 ack");
    send(OP_RD8, pa(BLK, 8 * 100), 0, 0, 0, r);
    chk(r.hdr.op == OP_RESP && r.data[63:0] == 64'h1234_5678_9abc_def0, "rd8 data");
    chk(r.hdr.len == LEN1 && r.hdr.src_router == blk_router(BLK, 1'b1), "rd8 header");
    // line read of untouched memory
    send(OP_RDLINE, pa(BLK, 64 * 20 + 24), 0, 0, 0, r);
    for (int k = 0; k < 8; k++) chk(r.data[64*k +: 64] == init_word(160 + k), "rdline word");
    chk(r.hdr.len == LEN4, "rdline len");
    // line write then line read
    for (int k = 0; k < 8; k++) line[64*k +: 64] = {$urandom, $urandom};
    send(OP_WRLINE, pa(BLK, 64 * 30), line, 0, 0, r);
    chk(r.hdr.op == OP_ACK, "wrline ack");
    send(OP_RDLINE, pa(BLK, 64 * 30), 0, 0, 0, r);
    chk(r.data == line, "wrline/rdline data");
    // atomic add
    send(OP_ATOMIC, pa(BLK, 8 * 100), 512'd5, {AT_ADD, 60'd0}, 0, r);
    chk(r.data[63:0] == 64'h1234_5678_9abc_def0, "atomic old value");
    send(OP_RD8, pa(BLK, 8 * 100), 0, 0, 0, r);
    chk(r.data[63:0] == 64'h1234_5678_9abc_def5, "atomic new value");
    // indirect load, both arrays here: B at word 500 holds 7, A at word 1000
    send(OP_WR8, pa(BLK, 8 * 500), 512'd7, 0, 0, r);
    send(OP_INDRD, pa(BLK, 8 * 500), 0, 64'(pa(BLK, 8 * 1000)), 2'd3, r);
    chk(r.hdr.op == OP_RESP && r.data[63:0] == init_word(1007), "indirect local");
    chk(r.hdr.dst_router == 4'd9, "indirect local goes to requester");
    // indirect load with A in block 5: forwarded as a read to block 5
    send(OP_INDRD, pa(BLK, 8 * 500), 0, 64'(pa(3'd5, 8 * 1000)), 2'd3, r);
    chk(r.hdr.op == OP_RD8 && r.hdr.addr == pa(3'd5, 8 * 1007), "indirect forward address");
    chk(r.hdr.dst_router == blk_router(3'd5, 1'b1) && r.hdr.src_router == 4'd9
        && r.hdr.src_port == 4'd4, "indirect forward routing");
    // 32-bit index (shift 2)
    send(OP_INDRD, pa(BLK, 8 * 500), 0, 64'(pa(BLK, 8 * 1000)), 2'd2, r);
    chk(r.data[63:0] == init_word(1003) && r.hdr.op == OP_RESP, "indirect shift 2");
    // random 8-byte traffic
    for (int t = 0; t < 100; t++) begin
      logic [63:0] v;
      int unsigned w;
      w = $urandom_range(2000, 2100);
      v = {$urandom, $urandom};
      send(OP_WR8, pa(BLK, 8 * w), 512'(v), 0, 0, r);
      send(OP_RD8, pa(BLK, 8 * w), 0, 0, 0, r);
      chk(r.data[63:0] == v, "random rd/wr");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
