// mem_arb: shares one 8-byte memory port (the scratchpad) among N clients.
//
// Round-robin arbitration with a single access outstanding: a client's request
// is granted (c_ready) when the port is idle, the arbiter then waits for the
// memory's response and hands it to that client (c_resp_valid) before
// granting again. The memory is assumed to answer every request exactly once.
// This is this design's own glue; the paper does not describe how the engines
// and the network share a scratchpad.
module mem_arb
  import piuma_pkg::*;
#(
  parameter int N = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        c_valid     [N],
  output logic        c_ready     [N],
  input  mreq_t       c_req       [N],
  output logic        c_resp_valid[N],
  output logic [63:0] c_resp_data,
  output logic        m_valid,
  input  logic        m_ready,
  output mreq_t       m_req,
  input  logic        m_resp_valid,
  input  logic [63:0] m_resp_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          busy;
  logic [IW-1:0] owner, rr;
  logic          pick_v;
  logic [IW-1:0] pick;

  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = 0; k < N; k++) begin
      int i;
      i = (int'(rr) + k) % N;
      if (!pick_v && c_valid[i]) begin
        pick_v = 1'b1;
        pick   = IW'(i);
      end
    end
  end

  assign m_valid = !busy && pick_v;
  assign m_req   = c_req[pick];
  assign c_resp_data = m_resp_data;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      c_ready[i]      = m_valid && m_ready && (pick == IW'(i));
      c_resp_valid[i] = busy && m_resp_valid && (owner == IW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0; rr <= '0;
    end else begin
      if (m_valid && m_ready) begin
        busy  <= 1'b1;
        owner <= pick;
        rr    <= IW'((int'(pick) + 1) % N);
      end else if (busy && m_resp_valid) busy <= 1'b0;
    end
  end
endmodule
