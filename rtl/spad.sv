// spad: the scratchpad SRAM of one PIUMA block (4 MB by default).
//
// Organised as BYTES/8 words of 8 bytes, one access port. A request is taken
// when req_valid and req_ready are both high; the response (read data, or the
// old value for an atomic) comes back on resp_valid one cycle later. An atomic
// reads the word, passes it through atomic_alu and writes the result back.
// Writes also produce a response (an acknowledge) so that every request gets
// exactly one answer, in order. An atomic also holds off the next request for
// one cycle while its result is written back. Address bits below 3 are ignored.
//
// Size and 8-byte access and in-place atomics follow the paper; the
// single-port array, latencies and response-per-request rule are this
// design's own choices.
module spad
  import piuma_pkg::*;
#(
  parameter int BYTES = 4 * 1024 * 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  mreq_t       req,
  output logic        resp_valid,
  output logic [63:0] resp_data
);
  localparam int WORDS = BYTES / 8;
  localparam int AW    = $clog2(WORDS);

  logic [63:0] mem [WORDS];

  logic        at_busy;       // second cycle of an atomic
  logic [AW-1:0] at_addr;
  atop_e       at_op;
  logic [63:0] at_opnd, at_opnd2;
  logic [63:0] rd_q;
  logic [63:0] at_new;
  logic        rd_pend;

  assign req_ready = !at_busy;

  atomic_alu u_alu (.op(at_op), .old_val(rd_q), .operand(at_opnd), .operand2(at_opnd2),
                    .new_val(at_new));

  wire [AW-1:0] widx = req.addr[AW+2:3];

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) begin
      rd_q <= mem[widx];
      if (req.we && !req.atomic) mem[widx] <= req.wdata;
    end
    if (at_busy) mem[at_addr] <= at_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      at_busy <= 1'b0; rd_pend <= 1'b0; at_addr <= '0; at_op <= AT_ADD;
      at_opnd <= '0; at_opnd2 <= '0;
    end else begin
      at_busy <= req_valid && req_ready && req.atomic;
      rd_pend <= req_valid && req_ready && !req.atomic;
      if (req_valid && req_ready) begin
        at_addr <= widx; at_op <= req.atop; at_opnd <= req.wdata; at_opnd2 <= req.operand2;
      end
    end
  end

  assign resp_valid = rd_pend || at_busy;
  assign resp_data  = rd_q;
endmodule
