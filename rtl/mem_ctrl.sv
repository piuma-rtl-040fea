// mem_ctrl: one block's memory controller, built for native 8-byte accesses.
//
// It serves one request packet at a time and talks to its DRAM channel through
// a simple word port (8-byte words, one request per cycle when dram_req_ready,
// read data returned in order on dram_rvalid). Supported requests:
//   OP_RD8 / OP_WR8       one 8-byte word
//   OP_RDLINE / OP_WRLINE a 64-byte line as 8 word accesses
//   OP_ATOMIC             read, atomic_alu, write back; the old value returns
//   OP_INDRD              indirect load A[B[i]]: read the index B[i] at addr,
//                         form the target A + (B[i] << shift) (A in aux) and,
//                         if the target lives in this controller, read it and
//                         answer the requester directly; otherwise send a new
//                         OP_RD8 straight to the owning block with the
//                         original requester as source, so its answer goes
//                         back to the requester without visiting the core.
// The out_* port carries either the response (OP_RESP / OP_ACK) or that
// forwarded request; it is held until out_ready.
//
// The 8-byte/line support, the remote atomics at the controller and the
// controller-to-controller hand-off of indirect loads (three network
// traversals instead of four) follow the paper. The DRAM word port, the
// one-request-at-a-time service and the packet fields are this design's own.
module mem_ctrl
  import piuma_pkg::*;
#(
  parameter logic [2:0] MY_BLOCK  = 3'd0,
  parameter logic [3:0] MY_ROUTER = 4'd1
) (
  input  logic        clk,
  input  logic        rst_n,
  // request from the network interface
  input  logic        req_valid,
  output logic        req_ready,
  input  pkt_t        req,
  // response or forwarded request to the network interface
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  // DRAM word port
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output logic        dram_we,
  output logic [31:0] dram_addr,     // 8-byte word address
  output logic [63:0] dram_wdata,
  input  logic        dram_rvalid,
  input  logic [63:0] dram_rdata
);
  typedef enum logic [2:0] { S_IDLE, S_ISSUE, S_WAIT, S_ATWR, S_RESP } st_e;
  st_e st;

  hdr_t        h;            // request being served
  logic [511:0] wbuf;        // write payload
  logic [63:0] rbuf [8];     // read data
  logic [3:0]  n_words, n_iss, n_rcv;
  logic        do_write;
  logic [31:0] base_w;       // word address of the first access
  logic        ind_second;   // second (target) read of a local indirect load
  logic        fwd;          // out_pkt is a forwarded request
  logic [ADDR_W-1:0] fwd_addr;
  logic [63:0] at_new;

  atomic_alu u_alu (.op(atop_e'(h.aux[63:60])), .old_val(rbuf[0]), .operand(wbuf[63:0]),
                    .operand2({4'd0, h.aux[59:0]}), .new_val(at_new));

  wire [ADDR_W-1:0] ind_tgt = h.aux[ADDR_W-1:0] + (ADDR_W'(rbuf[0]) << h.shift);
  wire ind_local = (pa_block(ind_tgt) == MY_BLOCK) && (pa_region(ind_tgt) == RG_DRAM);

  assign req_ready = (st == S_IDLE);

  always_comb begin
    dram_req_valid = 1'b0;
    dram_we        = 1'b0;
    dram_addr      = base_w + 32'(n_iss);
    dram_wdata     = wbuf[64*n_iss[2:0] +: 64];
    if (st == S_ISSUE) begin
      dram_req_valid = 1'b1;
      dram_we        = do_write;
    end else if (st == S_ATWR) begin
      dram_req_valid = 1'b1;
      dram_we        = 1'b1;
      dram_addr      = base_w;
      dram_wdata     = at_new;
    end
  end

  always_comb begin
    out_pkt = '0;
    if (fwd) begin
      out_pkt.hdr            = h;
      out_pkt.hdr.op         = OP_RD8;
      out_pkt.hdr.len        = LEN1;
      out_pkt.hdr.addr       = fwd_addr;
      out_pkt.hdr.dst_router = blk_router(pa_block(fwd_addr), 1'b1);
      out_pkt.hdr.dst_port   = 4'(P_EP);
    end else begin
      out_pkt.hdr.dst_router = h.src_router;
      out_pkt.hdr.dst_port   = h.src_port;
      out_pkt.hdr.src_router = MY_ROUTER;
      out_pkt.hdr.src_port   = 4'(P_EP);
      out_pkt.hdr.tag        = h.tag;
      out_pkt.hdr.addr       = h.addr;
      out_pkt.hdr.op         = (h.op == OP_WR8 || h.op == OP_WRLINE) ? OP_ACK : OP_RESP;
      out_pkt.hdr.len        = (h.op == OP_RDLINE) ? LEN4 : LEN1;
      for (int k = 0; k < 8; k++) out_pkt.data[64*k +: 64] = rbuf[k];
    end
  end
  assign out_valid = (st == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; h <= '0; wbuf <= '0; n_words <= '0; n_iss <= '0; n_rcv <= '0;
      do_write <= 1'b0; base_w <= '0; ind_second <= 1'b0; fwd <= 1'b0; fwd_addr <= '0;
      for (int k = 0; k < 8; k++) rbuf[k] <= '0;
    end else begin
      if (dram_rvalid && (st == S_ISSUE || st == S_WAIT)) begin
        rbuf[n_rcv[2:0]] <= dram_rdata;
        n_rcv <= n_rcv + 1'b1;
      end
      case (st)
        S_IDLE: if (req_valid) begin
          h          <= req.hdr;
          wbuf       <= req.data;
          fwd        <= 1'b0;
          ind_second <= 1'b0;
          n_iss      <= '0;
          n_rcv      <= '0;
          do_write   <= (req.hdr.op == OP_WR8 || req.hdr.op == OP_WRLINE);
          if (req.hdr.op == OP_RDLINE || req.hdr.op == OP_WRLINE) begin
            n_words <= 4'd8;
            base_w  <= {req.hdr.addr[34:6], 3'b000};
          end else begin
            n_words <= 4'd1;
            base_w  <= req.hdr.addr[34:3];
          end
          for (int k = 0; k < 8; k++) rbuf[k] <= '0;
          st <= S_ISSUE;
        end
        S_ISSUE: if (dram_req_ready) begin
          n_iss <= n_iss + 1'b1;
          if (n_iss + 1'b1 == n_words) st <= do_write ? S_RESP : S_WAIT;
        end
        S_WAIT: if (n_rcv == n_words) begin
          if (h.op == OP_ATOMIC) st <= S_ATWR;
          else if (h.op == OP_INDRD && !ind_second) begin
            if (ind_local) begin
              ind_second <= 1'b1;
              base_w     <= ind_tgt[34:3];
              n_iss      <= '0;
              n_rcv      <= '0;
              st         <= S_ISSUE;
            end else begin
              fwd      <= 1'b1;
              fwd_addr <= ind_tgt;
              st       <= S_RESP;
            end
          end else st <= S_RESP;
        end
        S_ATWR: if (dram_req_ready) st <= S_RESP;
        S_RESP: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
