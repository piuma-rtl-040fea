// net_rx: flit-to-packet assembler fed by one router output port.
//
// Incoming flits go into a DEPTH-entry buffer, so the router may send as long
// as it holds credits; each flit taken out of the buffer returns one credit
// (out_credit). Flits are unpacked in the order net_tx packs them (header and
// payload bits 63:0 in the head flit, then 200, 200 and 48 payload bits) and
// the finished packet is held on pkt/pkt_valid until pkt_ready. The assembler
// takes one flit per cycle while no finished packet is waiting.
//
// Credit flow control follows the paper; buffer depth and packing are this
// design's own.
module net_rx
  import piuma_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t flit,
  input  logic  flit_valid,
  output logic  out_credit,
  output logic  pkt_valid,
  input  logic  pkt_ready,
  output pkt_t  pkt
);
  flit_t front;
  logic  empty, full, pop;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic [1:0] idx;

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .push(flit_valid), .wdata(flit), .pop(pop), .rdata(front),
    .empty(empty), .full(full), .count(cnt));

  assign pop = !empty && !pkt_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt <= '0; pkt_valid <= 1'b0; idx <= '0; out_credit <= 1'b0;
    end else begin
      out_credit <= pop;
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (pop) begin
        case (front.head ? 2'd0 : idx)
          2'd0: begin
            pkt.hdr        <= hdr_t'(front.data[FLIT_W-1 -: HDR_W]);
            pkt.data       <= '0;
            pkt.data[63:0] <= front.data[63:0];
          end
          2'd1: pkt.data[263:64]  <= front.data;
          2'd2: pkt.data[463:264] <= front.data;
          default: pkt.data[511:464] <= front.data[47:0];
        endcase
        idx <= front.head ? 2'd1 : idx + 2'd1;
        if (front.tail) begin
          pkt_valid <= 1'b1;
          idx       <= '0;
        end
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(flit_valid && full && !pop));
endmodule
