// dram_model: behavioural model of a DRAM channel behind a memory controller's
// word port, for simulation only. It holds WORDS 8-byte words (the address
// wraps), accepts one request per cycle except when `busy_pattern` stalls it,
// and returns read data in order LAT cycles after the request. Contents start
// as a function of the address so reads of unwritten words are predictable:
// word a holds {32'hD0D0_0000 | a[15:0], a}.
module dram_model #(
  parameter int WORDS = 4096,
  parameter int LAT   = 4
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [63:0] wdata,
  output logic        rvalid,
  output logic [63:0] rdata
);
  logic [63:0] mem [WORDS];
  logic [LAT-1:0]      v_pipe = '0;
  logic [63:0]         d_pipe [LAT];
  int unsigned         cyc = 0;

  initial for (int a = 0; a < WORDS; a++) mem[a] = {16'hD0D0, 16'(a), 32'(a)};

  assign req_ready = (cyc % 5) != 3;     // stall one cycle in five
  assign rvalid    = v_pipe[LAT-1];
  assign rdata     = d_pipe[LAT-1];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    v_pipe <= {v_pipe[LAT-2:0], req_valid && req_ready && !we};
    d_pipe[0] <= mem[addr % WORDS];
    for (int i = 1; i < LAT; i++) d_pipe[i] <= d_pipe[i-1];
    if (req_valid && req_ready && we) mem[addr % WORDS] <= wdata;
  end

  function automatic logic [63:0] peek(input int unsigned a);
    return mem[a % WORDS];
  endfunction
endmodule
