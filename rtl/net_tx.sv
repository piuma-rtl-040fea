// net_tx: packet-to-flit serializer feeding one router input port.
//
// A pkt_t (header plus up to 64 bytes) is cut into hdr.len flits: flit 0
// holds the 136-bit header and payload bits 63:0, flits 1..3 hold the next
// 200, 200 and 48 payload bits, so 1, 2 and 4 flits carry 8, 16 and 64 bytes.
// The first flit is marked head, the last tail. A flit is sent only while the
// sender holds a credit for the router's input buffer (one credit per free
// entry, CREDITS at reset, one returned per in_credit pulse). pkt_ready pulses
// in the cycle the last flit leaves. One flit per cycle at most.
//
// Flit size, 1/2/4-flit packets and credit flow control follow the paper; the
// packing of header and payload into flits is this design's own.
module net_tx
  import piuma_pkg::*;
#(
  parameter int CREDITS = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  pkt_valid,
  output logic  pkt_ready,
  input  pkt_t  pkt,
  output flit_t flit,
  output logic  flit_valid,
  input  logic  in_credit
);
  localparam int CW = $clog2(CREDITS + 1);
  logic [CW-1:0] cred;
  logic [1:0]    idx;
  logic [2:0]    nfl;

  assign nfl = 3'(len_flits(pkt.hdr.len));

  always_comb begin
    flit = '0;
    flit.head = (idx == 2'd0);
    flit.tail = (3'(idx) + 3'd1 == nfl);
    case (idx)
      2'd0: flit.data = {pkt.hdr, pkt.data[63:0]};
      2'd1: flit.data = pkt.data[263:64];
      2'd2: flit.data = pkt.data[463:264];
      default: flit.data = {152'd0, pkt.data[511:464]};
    endcase
  end

  assign flit_valid = pkt_valid && (cred != '0);
  assign pkt_ready  = flit_valid && flit.tail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cred <= CW'(CREDITS);
      idx  <= '0;
    end else begin
      cred <= cred - (flit_valid ? 1'b1 : 1'b0) + (in_credit ? 1'b1 : 1'b0);
      if (flit_valid) idx <= flit.tail ? 2'd0 : idx + 2'd1;
    end
  end
endmodule
