// piuma_block: one PIUMA block -- the memory side of four multi-threaded and
// two single-threaded cores, with scratchpad, memory controller and offload
// engines, attached to the mesh through two routers.
//
// Core side (router 0 of the block, local port 4): a core memory request
// (creq) carries an application address; the ATT translates it to a physical
// global address, which names the block that owns it, and the request leaves
// as a packet for that block's target side. Responses come back to the same
// port and are handed out on cresp. A request whose address no ATT rule
// covers is dropped and att_miss pulses.
// Target side (router 1 of the block, local port 4): incoming requests are
// steered by address region to the memory controller (DRAM) or to the
// scratchpad front end; their responses, and indirect loads the memory
// controller forwards to another block, leave through the same port.
// The DMA and queue engines and the network share the scratchpad through a
// round-robin port arbiter. The block's collective engine combines its six
// cores' contributions and passes one to the socket-level engine
// (blk_arrive/blk_value); the socket's release is returned to the cores.
// The four thread schedulers and register files of the MTCs are instantiated
// with their control brought out, since the core pipelines are not built.
//
// Block contents (4 MTC + 2 STC, SPAD, offload engines, one memory controller)
// follow the paper. Two routers per block, the split into core and target
// sides and every interface here are this design's own arrangement.
module piuma_block
  import piuma_pkg::*;
#(
  parameter logic [2:0] MY_BLOCK   = 3'd0,
  parameter int         SPAD_BYTES = 4 * 1024 * 1024,
  parameter int         NMTC       = 4,
  parameter int         NTHREADS   = 16,
  parameter int         NCORES     = 6,
  parameter int         BUF_DEPTH  = 8,
  localparam int        TW         = $clog2(NTHREADS),
  localparam int        RAW        = $clog2(NTHREADS * 32)
) (
  input  logic        clk,
  input  logic        rst_n,
  // core memory requests / responses
  input  logic        creq_valid,
  output logic        creq_ready,
  input  creq_t       creq,
  output logic        att_miss,
  output logic        cresp_valid,
  input  logic        cresp_ready,
  output pkt_t        cresp,
  // ATT programming (rule index, fields)
  input  logic        att_we,
  input  logic [1:0]  att_idx,
  input  logic        att_valid,
  input  logic [ADDR_W-1:0] att_base,
  input  logic [ADDR_W-1:0] att_size,
  input  logic        att_mode,
  input  logic [2:0]  att_blk,
  input  logic [5:0]  att_gran,
  input  region_e     att_region,
  input  logic [OFS_W-1:0] att_phys_base,
  // DMA engine command
  input  logic        dma_valid,
  output logic        dma_ready,
  input  logic [1:0]  dma_mode,
  input  logic [ADDR_W-1:0] dma_src,
  input  logic [ADDR_W-1:0] dma_dst,
  input  logic [ADDR_W-1:0] dma_idx,
  input  logic [ADDR_W-1:0] dma_base,
  input  logic [ADDR_W-1:0] dma_stride,
  input  logic [31:0] dma_count,
  output logic        dma_done,
  // queue engine
  input  logic        q_cfg_we,
  input  logic [1:0]  q_cfg_qid,
  input  logic [ADDR_W-1:0] q_cfg_base,
  input  logic [15:0] q_cfg_cap,
  input  logic        q_valid,
  output logic        q_ready,
  input  logic        q_push,
  input  logic [1:0]  q_qid,
  input  logic [63:0] q_data,
  output logic        q_resp_valid,
  output logic        q_resp_ok,
  output logic [63:0] q_resp_data,
  // collectives
  input  logic [1:0]        coll_op,
  input  logic [NCORES-1:0] coll_arrive,
  input  logic [63:0]       coll_value [NCORES],
  output logic              blk_arrive,
  output logic [63:0]       blk_value,
  // MTC thread schedulers and register files
  input  logic [NMTC-1:0]   mtc_stall,
  input  logic [NMTC-1:0]   mtc_start,
  input  logic [NMTC-1:0]   mtc_stop,
  input  logic [TW-1:0]     mtc_ctl_tid [NMTC],
  input  logic [NMTC-1:0]   mtc_complete,
  input  logic [TW-1:0]     mtc_complete_tid [NMTC],
  output logic [NMTC-1:0]   mtc_issue_valid,
  output logic [TW-1:0]     mtc_issue_tid [NMTC],
  input  logic [4:0]        rf_rs0 [NMTC],
  input  logic [4:0]        rf_rs1 [NMTC],
  output logic [63:0]       rf_rd0 [NMTC],
  output logic [63:0]       rf_rd1 [NMTC],
  input  logic [NMTC-1:0]   rf_we,
  input  logic [RAW-1:0]    rf_wa [NMTC],
  input  logic [63:0]       rf_wd [NMTC],
  // DRAM word port of the memory controller
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output logic        dram_we,
  output logic [31:0] dram_addr,
  output logic [63:0] dram_wdata,
  input  logic        dram_rvalid,
  input  logic [63:0] dram_rdata,
  // router 0 (core side) local port
  output flit_t       r0_in_flit,
  output logic        r0_in_valid,
  input  logic        r0_in_credit,
  input  flit_t       r0_out_flit,
  input  logic        r0_out_valid,
  output logic        r0_out_credit,
  // router 1 (target side) local port
  output flit_t       r1_in_flit,
  output logic        r1_in_valid,
  input  logic        r1_in_credit,
  input  flit_t       r1_out_flit,
  input  logic        r1_out_valid,
  output logic        r1_out_credit
);
  localparam logic [3:0] R0 = blk_router(MY_BLOCK, 1'b0);
  localparam logic [3:0] R1 = blk_router(MY_BLOCK, 1'b1);

  // ---------------- core side ----------------
  logic              hit;
  logic [ADDR_W-1:0] pa;
  pkt_t              cpkt;
  logic              tx0_ready;

  att #(.NRULES(4)) u_att (
    .clk, .rst_n, .cfg_we(att_we), .cfg_idx(att_idx), .cfg_valid(att_valid),
    .cfg_base(att_base), .cfg_size(att_size), .cfg_mode(att_mode), .cfg_blk(att_blk),
    .cfg_gran(att_gran), .cfg_region(att_region), .cfg_phys_base(att_phys_base),
    .va(creq.va), .hit(hit), .pa(pa));

  always_comb begin
    cpkt                = '0;
    cpkt.hdr.dst_router = blk_router(pa_block(pa), 1'b1);
    cpkt.hdr.dst_port   = 4'(P_EP);
    cpkt.hdr.src_router = R0;
    cpkt.hdr.src_port   = 4'(P_EP);
    cpkt.hdr.op         = creq.op;
    cpkt.hdr.len        = (creq.op == OP_WRLINE) ? LEN4 : LEN1;
    cpkt.hdr.tag        = creq.tag;
    cpkt.hdr.addr       = pa;
    cpkt.hdr.aux        = creq.aux;
    cpkt.hdr.shift      = creq.shift;
    cpkt.data           = creq.data;
  end

  net_tx #(.CREDITS(BUF_DEPTH)) u_tx0 (
    .clk, .rst_n, .pkt_valid(creq_valid && hit), .pkt_ready(tx0_ready), .pkt(cpkt),
    .flit(r0_in_flit), .flit_valid(r0_in_valid), .in_credit(r0_in_credit));

  assign creq_ready = tx0_ready || (creq_valid && !hit);
  assign att_miss   = creq_valid && !hit;

  net_rx #(.DEPTH(BUF_DEPTH)) u_rx0 (
    .clk, .rst_n, .flit(r0_out_flit), .flit_valid(r0_out_valid), .out_credit(r0_out_credit),
    .pkt_valid(cresp_valid), .pkt_ready(cresp_ready), .pkt(cresp));

  // ---------------- target side ----------------
  pkt_t  tpkt;
  logic  t_valid, t_ready;
  logic  to_spad;
  logic  mc_req_ready, st_req_ready;

  net_rx #(.DEPTH(BUF_DEPTH)) u_rx1 (
    .clk, .rst_n, .flit(r1_out_flit), .flit_valid(r1_out_valid), .out_credit(r1_out_credit),
    .pkt_valid(t_valid), .pkt_ready(t_ready), .pkt(tpkt));

  assign to_spad = (pa_region(tpkt.hdr.addr) == RG_SPAD);
  assign t_ready = to_spad ? st_req_ready : mc_req_ready;

  logic  mc_out_valid, mc_out_ready, st_out_valid, st_out_ready;
  pkt_t  mc_out, st_out;

  mem_ctrl #(.MY_BLOCK(MY_BLOCK), .MY_ROUTER(R1)) u_mc (
    .clk, .rst_n,
    .req_valid(t_valid && !to_spad), .req_ready(mc_req_ready), .req(tpkt),
    .out_valid(mc_out_valid), .out_ready(mc_out_ready), .out_pkt(mc_out),
    .dram_req_valid, .dram_req_ready, .dram_we, .dram_addr, .dram_wdata,
    .dram_rvalid, .dram_rdata);

  logic        st_m_valid, st_m_ready, st_m_resp;
  mreq_t       st_m_req;
  logic [63:0] arb_rdata;

  spad_tgt #(.MY_ROUTER(R1)) u_st (
    .clk, .rst_n,
    .req_valid(t_valid && to_spad), .req_ready(st_req_ready), .req(tpkt),
    .out_valid(st_out_valid), .out_ready(st_out_ready), .out_pkt(st_out),
    .m_valid(st_m_valid), .m_ready(st_m_ready), .m_req(st_m_req),
    .m_resp_valid(st_m_resp), .m_resp_data(arb_rdata));

  // outgoing packets of the target side: memory controller or scratchpad
  logic lock, lock_sel, sel;
  logic tx1_ready;
  assign sel          = lock ? lock_sel : !mc_out_valid;   // 0 = mc, 1 = spad
  assign mc_out_ready = tx1_ready && !sel;
  assign st_out_ready = tx1_ready && sel;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock <= 1'b0; lock_sel <= 1'b0;
    end else if (tx1_ready) begin
      lock <= 1'b0;
    end else if (r1_in_valid) begin
      lock <= 1'b1; lock_sel <= sel;
    end
  end

  net_tx #(.CREDITS(BUF_DEPTH)) u_tx1 (
    .clk, .rst_n, .pkt_valid(sel ? st_out_valid : mc_out_valid), .pkt_ready(tx1_ready),
    .pkt(sel ? st_out : mc_out),
    .flit(r1_in_flit), .flit_valid(r1_in_valid), .in_credit(r1_in_credit));

  // ---------------- scratchpad and engines ----------------
  logic        a_valid [3];
  logic        a_ready [3];
  mreq_t       a_req   [3];
  logic        a_resp  [3];
  logic        sp_valid, sp_ready, sp_resp_valid;
  mreq_t       sp_req;
  logic [63:0] sp_rdata;
  logic        dma_m_valid, q_m_valid;
  mreq_t       dma_m_req, q_m_req;

  assign a_valid[0] = st_m_valid;  assign a_req[0] = st_m_req;
  assign a_valid[1] = dma_m_valid; assign a_req[1] = dma_m_req;
  assign a_valid[2] = q_m_valid;   assign a_req[2] = q_m_req;
  assign st_m_ready = a_ready[0];
  assign st_m_resp  = a_resp[0];

  mem_arb #(.N(3)) u_arb (
    .clk, .rst_n, .c_valid(a_valid), .c_ready(a_ready), .c_req(a_req),
    .c_resp_valid(a_resp), .c_resp_data(arb_rdata),
    .m_valid(sp_valid), .m_ready(sp_ready), .m_req(sp_req),
    .m_resp_valid(sp_resp_valid), .m_resp_data(sp_rdata));

  spad #(.BYTES(SPAD_BYTES)) u_spad (
    .clk, .rst_n, .req_valid(sp_valid), .req_ready(sp_ready), .req(sp_req),
    .resp_valid(sp_resp_valid), .resp_data(sp_rdata));

  logic dma_busy;
  dma_engine u_dma (
    .clk, .rst_n, .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd_mode(dma_mode),
    .cmd_src(dma_src), .cmd_dst(dma_dst), .cmd_idx(dma_idx), .cmd_base(dma_base),
    .cmd_stride(dma_stride), .cmd_count(dma_count), .busy(dma_busy), .done(dma_done),
    .m_valid(dma_m_valid), .m_ready(a_ready[1]), .m_req(dma_m_req),
    .m_resp_valid(a_resp[1]), .m_resp_data(arb_rdata));

  queue_engine #(.NQUEUES(4)) u_q (
    .clk, .rst_n, .cfg_we(q_cfg_we), .cfg_qid(q_cfg_qid), .cfg_base(q_cfg_base),
    .cfg_cap(q_cfg_cap), .op_valid(q_valid), .op_ready(q_ready), .op_push(q_push),
    .op_qid(q_qid), .op_data(q_data), .resp_valid(q_resp_valid), .resp_ok(q_resp_ok),
    .resp_data(q_resp_data), .m_valid(q_m_valid), .m_ready(a_ready[2]), .m_req(q_m_req),
    .m_resp_valid(a_resp[2]), .m_resp_data(arb_rdata));

  collective_engine #(.NPART(NCORES)) u_coll (
    .clk, .rst_n, .op(coll_op), .arrive(coll_arrive), .value(coll_value),
    .release_o(blk_arrive), .result(blk_value));

  // ---------------- multi-threaded cores ----------------
  for (genvar m = 0; m < NMTC; m++) begin : g_mtc
    logic [NTHREADS-1:0] inflight;
    mtc_sched #(.NTHREADS(NTHREADS)) u_sched (
      .clk, .rst_n, .stall(mtc_stall[m]), .thread_start(mtc_start[m]),
      .thread_stop(mtc_stop[m]), .ctl_tid(mtc_ctl_tid[m]),
      .complete_valid(mtc_complete[m]), .complete_tid(mtc_complete_tid[m]),
      .issue_valid(mtc_issue_valid[m]), .issue_tid(mtc_issue_tid[m]), .inflight(inflight));
    // the issuing thread's registers are read in the issue cycle
    regfile #(.NTHREADS(NTHREADS), .NREGS(32), .XLEN(64)) u_rf (
      .clk, .ra0({mtc_issue_tid[m], rf_rs0[m]}), .ra1({mtc_issue_tid[m], rf_rs1[m]}),
      .rd0(rf_rd0[m]), .rd1(rf_rd1[m]), .we(rf_we[m]), .wa(rf_wa[m]), .wd(rf_wd[m]));
  end
endmodule
