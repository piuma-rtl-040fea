// mem_model: behavioural 8-byte memory behind an mreq_t port, for simulation
// only. WORDS words (addresses wrap), initial word a = a * 3 + 1. It accepts a
// request when a free-running pseudo-random stall allows and answers one cycle
// later (read data, or anything for a write).
module mem_model
  import piuma_pkg::*;
#(
  parameter int WORDS = 1024
) (
  input  logic        clk,
  input  logic        m_valid,
  output logic        m_ready,
  input  mreq_t       m_req,
  output logic        m_resp_valid,
  output logic [63:0] m_resp_data
);
  logic [63:0] mem [WORDS];
  int unsigned cyc = 0;
  initial begin
    m_resp_valid = 0;
    for (int a = 0; a < WORDS; a++) mem[a] = 64'(a) * 3 + 1;
  end
  assign m_ready = (cyc % 7) != 2;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    m_resp_valid <= m_valid && m_ready;
    if (m_valid && m_ready) begin
      m_resp_data <= mem[m_req.addr[3 +: $clog2(WORDS)]];
      if (m_req.we) mem[m_req.addr[3 +: $clog2(WORDS)]] <= m_req.wdata;
    end
  end
endmodule
