// queue_engine: hardware queues kept in shared memory, with atomic push and pop.
//
// The engine owns NQUEUES queue descriptors (base address, capacity, head,
// tail, occupancy); the elements themselves are 8-byte words in memory at
// base + 8*slot, used as a ring. Because every push and pop on a queue passes
// through this one engine, inserts and removals are atomic without any lock
// taken by the cores. A queue is (re)configured through cfg_*, which also
// empties it. Operations arrive on op_* (one at a time); the answer comes on
// resp_valid with resp_ok = 0 for a push to a full queue or a pop from an empty
// one (no memory access is made then), and resp_data holding the popped word.
// A successful operation takes one memory access on the m_* port (issue, then
// wait for m_resp_valid).
//
// Engine-managed queues in shared memory follow the paper; descriptor format,
// failure status and the memory port are this design's own choices.
module queue_engine
  import piuma_pkg::*;
#(
  parameter int NQUEUES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [$clog2(NQUEUES)-1:0] cfg_qid,
  input  logic [ADDR_W-1:0] cfg_base,
  input  logic [15:0]       cfg_cap,
  input  logic              op_valid,
  output logic              op_ready,
  input  logic              op_push,      // 1 push, 0 pop
  input  logic [$clog2(NQUEUES)-1:0] op_qid,
  input  logic [63:0]       op_data,
  output logic              resp_valid,
  output logic              resp_ok,
  output logic [63:0]       resp_data,
  output logic              m_valid,
  input  logic              m_ready,
  output mreq_t             m_req,
  input  logic              m_resp_valid,
  input  logic [63:0]       m_resp_data
);
  localparam int QW = $clog2(NQUEUES);
  typedef struct packed {
    logic [ADDR_W-1:0] base;
    logic [15:0]       cap;
    logic [15:0]       head;
    logic [15:0]       tail;
    logic [15:0]       cnt;
  } qdesc_t;

  qdesc_t q [NQUEUES];

  typedef enum logic [1:0] { Q_IDLE, Q_ISSUE, Q_WAIT } st_e;
  st_e         st;
  logic        push;
  logic [QW-1:0] qid;
  logic [63:0] data;

  assign op_ready = (st == Q_IDLE);

  always_comb begin
    m_req       = '0;
    m_req.we    = push;
    m_req.wdata = data;
    m_req.addr  = q[qid].base + ADDR_W'({push ? q[qid].tail : q[qid].head, 3'b000});
    m_valid     = (st == Q_ISSUE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NQUEUES; j++) q[j] <= '0;
      st <= Q_IDLE; push <= 1'b0; qid <= '0; data <= '0;
      resp_valid <= 1'b0; resp_ok <= 1'b0; resp_data <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (cfg_we) q[cfg_qid] <= '{base: cfg_base, cap: cfg_cap, head: '0, tail: '0, cnt: '0};
      case (st)
        Q_IDLE: if (op_valid) begin
          push <= op_push; qid <= op_qid; data <= op_data;
          if (op_push ? (q[op_qid].cnt == q[op_qid].cap) : (q[op_qid].cnt == 0)) begin
            resp_valid <= 1'b1; resp_ok <= 1'b0; resp_data <= '0;
          end else st <= Q_ISSUE;
        end
        Q_ISSUE: if (m_ready) st <= Q_WAIT;
        Q_WAIT: if (m_resp_valid) begin
          st <= Q_IDLE;
          resp_valid <= 1'b1; resp_ok <= 1'b1;
          resp_data  <= push ? '0 : m_resp_data;
          if (push) begin
            q[qid].tail <= (q[qid].tail + 1'b1 == q[qid].cap) ? '0 : q[qid].tail + 1'b1;
            q[qid].cnt  <= q[qid].cnt + 1'b1;
          end else begin
            q[qid].head <= (q[qid].head + 1'b1 == q[qid].cap) ? '0 : q[qid].head + 1'b1;
            q[qid].cnt  <= q[qid].cnt - 1'b1;
          end
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
