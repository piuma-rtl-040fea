// piuma_socket: one PIUMA chip -- eight blocks on a sixteen-router 2-D mesh.
//
// Block b owns routers blk_router(b,0) (core side) and blk_router(b,1)
// (target side) and reaches every other block's memory controller and
// scratchpad through the mesh, so any core can address all memory of the
// socket through one global address space. Router local ports 5..9 of every
// router are brought out as ext_* ports: in the chip, ports 5 and 6 of each
// router lead to the optical I/O links (thirty-two in all) and one router
// hosts the PCIe endpoint; neither of those is built here. The eight memory
// controllers' DRAM word ports are also brought out. A socket-level
// collective engine combines the eight blocks' contributions and releases all
// cores together. The die-level shadow tag tracking the MOESI-F state of the
// 48 data caches is instantiated with its request port brought out, since the
// caches themselves are not built.
//
// Eight blocks, the mesh, the memory-controller count and the shadow tag follow
// the paper. The 8 x 2 router arrangement is read from the socket diagram; the
// mapping of blocks to routers and all port conventions are this design's own.
module piuma_socket
  import piuma_pkg::*;
#(
  parameter int SPAD_BYTES = 4 * 1024 * 1024,
  parameter int BUF_DEPTH  = 8,
  localparam int NB = NBLOCKS,
  localparam int NR = NROUTERS,
  localparam int NE = NPORTS - 5,       // external local ports per router
  localparam int NC = 6,                // cores per block
  localparam int NM = 4,                // MTCs per block
  localparam int TW = 4,
  localparam int RAW = 9
) (
  input  logic        clk,
  input  logic        rst_n,
  // core memory requests and responses, per block
  input  logic        creq_valid  [NB],
  output logic        creq_ready  [NB],
  input  creq_t       creq        [NB],
  output logic        att_miss    [NB],
  output logic        cresp_valid [NB],
  input  logic        cresp_ready [NB],
  output pkt_t        cresp       [NB],
  // ATT programming, broadcast to all blocks
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
  // DMA engines
  input  logic        dma_valid  [NB],
  output logic        dma_ready  [NB],
  input  logic [1:0]  dma_mode   [NB],
  input  logic [ADDR_W-1:0] dma_src    [NB],
  input  logic [ADDR_W-1:0] dma_dst    [NB],
  input  logic [ADDR_W-1:0] dma_idx    [NB],
  input  logic [ADDR_W-1:0] dma_base   [NB],
  input  logic [ADDR_W-1:0] dma_stride [NB],
  input  logic [31:0] dma_count  [NB],
  output logic        dma_done   [NB],
  // queue engines
  input  logic        q_cfg_we   [NB],
  input  logic [1:0]  q_cfg_qid  [NB],
  input  logic [ADDR_W-1:0] q_cfg_base [NB],
  input  logic [15:0] q_cfg_cap  [NB],
  input  logic        q_valid    [NB],
  output logic        q_ready    [NB],
  input  logic        q_push     [NB],
  input  logic [1:0]  q_qid      [NB],
  input  logic [63:0] q_data     [NB],
  output logic        q_resp_valid [NB],
  output logic        q_resp_ok    [NB],
  output logic [63:0] q_resp_data  [NB],
  // collectives
  input  logic [1:0]  coll_op,
  input  logic [NC-1:0] coll_arrive [NB],
  input  logic [63:0] coll_value [NB][NC],
  output logic        coll_release,
  output logic [63:0] coll_result,
  // MTC schedulers and register files
  input  logic [NM-1:0] mtc_stall [NB],
  input  logic [NM-1:0] mtc_start [NB],
  input  logic [NM-1:0] mtc_stop  [NB],
  input  logic [TW-1:0] mtc_ctl_tid [NB][NM],
  input  logic [NM-1:0] mtc_complete [NB],
  input  logic [TW-1:0] mtc_complete_tid [NB][NM],
  output logic [NM-1:0] mtc_issue_valid [NB],
  output logic [TW-1:0] mtc_issue_tid [NB][NM],
  input  logic [4:0]  rf_rs0 [NB][NM],
  input  logic [4:0]  rf_rs1 [NB][NM],
  output logic [63:0] rf_rd0 [NB][NM],
  output logic [63:0] rf_rd1 [NB][NM],
  input  logic [NM-1:0] rf_we [NB],
  input  logic [RAW-1:0] rf_wa [NB][NM],
  input  logic [63:0] rf_wd [NB][NM],
  // shadow tag
  input  logic        st_req_valid,
  input  logic [5:0]  st_req_cache,
  input  logic [5:0]  st_req_line,
  input  cevent_e     st_req_ev,
  output logic        st_resp_valid,
  output cstate_e     st_resp_state,
  output logic        st_resp_err,
  output logic [47:0] st_resp_inval,
  // DRAM word ports
  output logic        dram_req_valid [NB],
  input  logic        dram_req_ready [NB],
  output logic        dram_we        [NB],
  output logic [31:0] dram_addr      [NB],
  output logic [63:0] dram_wdata     [NB],
  input  logic        dram_rvalid    [NB],
  input  logic [63:0] dram_rdata     [NB],
  // router local ports 5..9 (optical I/O, host interface)
  input  flit_t       ext_in_flit    [NR][NE],
  input  logic        ext_in_valid   [NR][NE],
  output logic        ext_in_credit  [NR][NE],
  output flit_t       ext_out_flit   [NR][NE],
  output logic        ext_out_valid  [NR][NE],
  input  logic        ext_out_credit [NR][NE]
);
  flit_t loc_in_flit   [NR][NPORTS-4];
  logic  loc_in_valid  [NR][NPORTS-4];
  logic  loc_in_credit [NR][NPORTS-4];
  flit_t loc_out_flit  [NR][NPORTS-4];
  logic  loc_out_valid [NR][NPORTS-4];
  logic  loc_out_credit[NR][NPORTS-4];

  mesh #(.MX(MESH_X), .MY(MESH_Y), .NP(NPORTS), .BUF_DEPTH(BUF_DEPTH)) u_mesh (
    .clk, .rst_n, .loc_in_flit, .loc_in_valid, .loc_in_credit,
    .loc_out_flit, .loc_out_valid, .loc_out_credit);

  for (genvar r = 0; r < NR; r++) begin : g_ext
    for (genvar e = 0; e < NE; e++) begin : g_e
      assign loc_in_flit[r][1+e]    = ext_in_flit[r][e];
      assign loc_in_valid[r][1+e]   = ext_in_valid[r][e];
      assign ext_in_credit[r][e]    = loc_in_credit[r][1+e];
      assign ext_out_flit[r][e]     = loc_out_flit[r][1+e];
      assign ext_out_valid[r][e]    = loc_out_valid[r][1+e];
      assign loc_out_credit[r][1+e] = ext_out_credit[r][e];
    end
  end

  logic        blk_arrive [NB];
  logic [63:0] blk_value  [NB];
  logic [NB-1:0] sock_arrive;

  for (genvar b = 0; b < NB; b++) begin : g_blk
    localparam int R0 = int'(blk_router(3'(b), 1'b0));
    localparam int R1 = int'(blk_router(3'(b), 1'b1));
    piuma_block #(.MY_BLOCK(3'(b)), .SPAD_BYTES(SPAD_BYTES), .NMTC(NM), .NTHREADS(16),
                  .NCORES(NC), .BUF_DEPTH(BUF_DEPTH)) u_blk (
      .clk, .rst_n,
      .creq_valid(creq_valid[b]), .creq_ready(creq_ready[b]), .creq(creq[b]),
      .att_miss(att_miss[b]), .cresp_valid(cresp_valid[b]), .cresp_ready(cresp_ready[b]),
      .cresp(cresp[b]),
      .att_we, .att_idx, .att_valid, .att_base, .att_size, .att_mode, .att_blk, .att_gran,
      .att_region, .att_phys_base,
      .dma_valid(dma_valid[b]), .dma_ready(dma_ready[b]), .dma_mode(dma_mode[b]),
      .dma_src(dma_src[b]), .dma_dst(dma_dst[b]), .dma_idx(dma_idx[b]), .dma_base(dma_base[b]),
      .dma_stride(dma_stride[b]), .dma_count(dma_count[b]), .dma_done(dma_done[b]),
      .q_cfg_we(q_cfg_we[b]), .q_cfg_qid(q_cfg_qid[b]), .q_cfg_base(q_cfg_base[b]),
      .q_cfg_cap(q_cfg_cap[b]), .q_valid(q_valid[b]), .q_ready(q_ready[b]),
      .q_push(q_push[b]), .q_qid(q_qid[b]), .q_data(q_data[b]),
      .q_resp_valid(q_resp_valid[b]), .q_resp_ok(q_resp_ok[b]), .q_resp_data(q_resp_data[b]),
      .coll_op, .coll_arrive(coll_arrive[b]), .coll_value(coll_value[b]),
      .blk_arrive(blk_arrive[b]), .blk_value(blk_value[b]),
      .mtc_stall(mtc_stall[b]), .mtc_start(mtc_start[b]), .mtc_stop(mtc_stop[b]),
      .mtc_ctl_tid(mtc_ctl_tid[b]), .mtc_complete(mtc_complete[b]),
      .mtc_complete_tid(mtc_complete_tid[b]), .mtc_issue_valid(mtc_issue_valid[b]),
      .mtc_issue_tid(mtc_issue_tid[b]), .rf_rs0(rf_rs0[b]), .rf_rs1(rf_rs1[b]),
      .rf_rd0(rf_rd0[b]), .rf_rd1(rf_rd1[b]), .rf_we(rf_we[b]), .rf_wa(rf_wa[b]),
      .rf_wd(rf_wd[b]),
      .dram_req_valid(dram_req_valid[b]), .dram_req_ready(dram_req_ready[b]),
      .dram_we(dram_we[b]), .dram_addr(dram_addr[b]), .dram_wdata(dram_wdata[b]),
      .dram_rvalid(dram_rvalid[b]), .dram_rdata(dram_rdata[b]),
      .r0_in_flit(loc_in_flit[R0][0]), .r0_in_valid(loc_in_valid[R0][0]),
      .r0_in_credit(loc_in_credit[R0][0]), .r0_out_flit(loc_out_flit[R0][0]),
      .r0_out_valid(loc_out_valid[R0][0]), .r0_out_credit(loc_out_credit[R0][0]),
      .r1_in_flit(loc_in_flit[R1][0]), .r1_in_valid(loc_in_valid[R1][0]),
      .r1_in_credit(loc_in_credit[R1][0]), .r1_out_flit(loc_out_flit[R1][0]),
      .r1_out_valid(loc_out_valid[R1][0]), .r1_out_credit(loc_out_credit[R1][0]));
    assign sock_arrive[b] = blk_arrive[b];
  end

  collective_engine #(.NPART(NB)) u_coll (
    .clk, .rst_n, .op(coll_op), .arrive(sock_arrive), .value(blk_value),
    .release_o(coll_release), .result(coll_result));

  shadow_tag #(.NCACHES(NB * NC), .NLINES(64)) u_st (
    .clk, .rst_n, .req_valid(st_req_valid), .req_cache(st_req_cache), .req_line(st_req_line),
    .req_ev(st_req_ev), .resp_valid(st_resp_valid), .resp_state(st_resp_state),
    .resp_err(st_resp_err), .resp_inval(st_resp_inval));
endmodule
