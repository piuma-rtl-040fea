// spad_tgt: network-facing front end of the scratchpad.
//
// Turns one request packet into scratchpad accesses on the m_* port and builds
// the response packet: OP_RD8 and OP_ATOMIC give OP_RESP with the word (the old
// value for an atomic), OP_WR8 and OP_WRLINE give OP_ACK, OP_RDLINE gives a
// 4-flit OP_RESP with the 64-byte line. A line is moved as 8 word accesses.
// Each access waits for its m_resp_valid before the next is issued. Atomic
// packets carry the operand in data word 0 and the operation in aux[63:60]
// (compare value for CAS in aux[59:0]). One packet is served at a time.
//
// Access to the scratchpad from anywhere in the system through the network,
// and atomics at the scratchpad, follow the paper; the rest is this design's.
module spad_tgt
  import piuma_pkg::*;
#(
  parameter logic [3:0] MY_ROUTER = 4'd1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  pkt_t        req,
  output logic        out_valid,
  input  logic        out_ready,
  output pkt_t        out_pkt,
  output logic        m_valid,
  input  logic        m_ready,
  output mreq_t       m_req,
  input  logic        m_resp_valid,
  input  logic [63:0] m_resp_data
);
  typedef enum logic [1:0] { T_IDLE, T_ISSUE, T_WAIT, T_RESP } st_e;
  st_e          st;
  hdr_t         h;
  logic [511:0] buf_q;
  logic [3:0]   k, n;

  wire is_wr   = (h.op == OP_WR8 || h.op == OP_WRLINE);
  wire is_line = (h.op == OP_RDLINE || h.op == OP_WRLINE);

  assign req_ready = (st == T_IDLE);
  assign m_valid   = (st == T_ISSUE);

  always_comb begin
    m_req          = '0;
    m_req.we       = is_wr;
    m_req.atomic   = (h.op == OP_ATOMIC);
    m_req.atop     = atop_e'(h.aux[63:60]);
    m_req.operand2 = {4'd0, h.aux[59:0]};
    m_req.wdata    = buf_q[64*k[2:0] +: 64];
    m_req.addr     = is_line ? {h.addr[ADDR_W-1:6], k[2:0], 3'b000} : h.addr;
  end

  always_comb begin
    out_pkt                = '0;
    out_pkt.hdr.dst_router = h.src_router;
    out_pkt.hdr.dst_port   = h.src_port;
    out_pkt.hdr.src_router = MY_ROUTER;
    out_pkt.hdr.src_port   = 4'(P_EP);
    out_pkt.hdr.tag        = h.tag;
    out_pkt.hdr.addr       = h.addr;
    out_pkt.hdr.op         = is_wr ? OP_ACK : OP_RESP;
    out_pkt.hdr.len        = (h.op == OP_RDLINE) ? LEN4 : LEN1;
    out_pkt.data           = is_wr ? '0 : buf_q;
  end
  assign out_valid = (st == T_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; h <= '0; buf_q <= '0; k <= '0; n <= '0;
    end else begin
      case (st)
        T_IDLE: if (req_valid) begin
          h     <= req.hdr;
          buf_q <= req.data;
          k     <= '0;
          n     <= (req.hdr.op == OP_RDLINE || req.hdr.op == OP_WRLINE) ? 4'd8 : 4'd1;
          st    <= T_ISSUE;
        end
        T_ISSUE: if (m_ready) st <= T_WAIT;
        T_WAIT: if (m_resp_valid) begin
          if (!is_wr) buf_q[64*k[2:0] +: 64] <= m_resp_data;
          k <= k + 1'b1;
          st <= (k + 1'b1 == n) ? T_RESP : T_ISSUE;
        end
        T_RESP: if (out_ready) st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
