// piuma_pkg: types and constants shared by the PIUMA socket RTL.
//
// A link carries one 200-bit flit per cycle (25-byte data links) plus head/tail
// sideband bits. Packets are 1, 2 or 4 flits and carry 8, 16 or 64 bytes of
// payload. The header layout, opcode encoding, physical address layout and
// atomic operation set below are this design's own choices: the flit size and
// packet lengths follow the paper, the field layout does not come from it.
package piuma_pkg;

  localparam int FLIT_W     = 200;  // 25-byte link
  localparam int ADDR_W     = 40;
  localparam int NBLOCKS    = 8;
  localparam int MESH_X     = 8;
  localparam int MESH_Y     = 2;
  localparam int NROUTERS   = MESH_X * MESH_Y;
  localparam int NPORTS     = 10;
  localparam int NLOCAL     = NPORTS - 4;
  localparam int LINE_BYTES = 64;

  // Router port numbers
  localparam int P_N = 0, P_E = 1, P_S = 2, P_W = 3, P_EP = 4, P_NET0 = 5, P_NET1 = 6;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Packet length code: 0 -> 1 flit (8 B), 1 -> 2 flits (16 B), 2 -> 4 flits (64 B)
  typedef enum logic [1:0] { LEN1 = 2'd0, LEN2 = 2'd1, LEN4 = 2'd2 } plen_e;

  typedef enum logic [3:0] {
    OP_RD8     = 4'd0,   // 8-byte read
    OP_WR8     = 4'd1,   // 8-byte write
    OP_RDLINE  = 4'd2,   // 64-byte line read
    OP_WRLINE  = 4'd3,   // 64-byte line write
    OP_ATOMIC  = 4'd4,   // remote atomic: data word 0 = operand, aux[63:60] = atop_e, aux[59:0] = CAS compare value
    OP_INDRD   = 4'd5,   // indirect load: addr = &B[i], aux = A, target = A + (B[i] << shift)
    OP_RESP    = 4'd8,   // response carrying read data
    OP_ACK     = 4'd9    // write acknowledge
  } op_e;

  typedef enum logic [3:0] {
    AT_ADD = 4'd0, AT_AND = 4'd1, AT_OR = 4'd2, AT_XOR = 4'd3,
    AT_MIN = 4'd4, AT_MAX = 4'd5, AT_SWAP = 4'd6, AT_CAS = 4'd7
  } atop_e;

  // Physical global address: {region, block, offset}
  typedef enum logic [1:0] { RG_DRAM = 2'd0, RG_SPAD = 2'd1, RG_CSR = 2'd2 } region_e;
  localparam int OFS_W = 35;

  function automatic logic [2:0] pa_block(input logic [ADDR_W-1:0] a);
    return a[OFS_W+2:OFS_W];
  endfunction
  function automatic region_e pa_region(input logic [ADDR_W-1:0] a);
    return region_e'(a[ADDR_W-1:ADDR_W-2]);
  endfunction

  // Packet header: 136 bits, followed in flit 0 by the first 64 payload bits.
  typedef struct packed {
    logic [3:0]        dst_router;
    logic [3:0]        dst_port;
    logic [3:0]        src_router;
    logic [3:0]        src_port;
    op_e               op;
    plen_e             len;
    logic [7:0]        tag;
    logic [ADDR_W-1:0] addr;
    logic [63:0]       aux;
    logic [1:0]        shift;   // OP_INDRD: index size, target = A + (B[i] << shift)
  } hdr_t;
  localparam int HDR_W = $bits(hdr_t);   // 136

  // A whole request or response as seen by a memory target.
  typedef struct packed {
    hdr_t        hdr;
    logic [511:0] data;   // payload, word 0 in bits 63:0
  } pkt_t;

  // A core's memory request as it leaves the core, before address translation.
  typedef struct packed {
    op_e               op;
    logic [ADDR_W-1:0] va;      // application address (translated by the ATT)
    logic [63:0]       aux;     // OP_INDRD: physical address of A; OP_ATOMIC: op and compare value
    logic [1:0]        shift;
    logic [7:0]        tag;
    logic [511:0]      data;
  } creq_t;

  // Simple 8-byte memory port used between engines and the scratchpad.
  typedef struct packed {
    logic              we;
    logic              atomic;
    atop_e             atop;
    logic [ADDR_W-1:0] addr;
    logic [63:0]       wdata;
    logic [63:0]       operand2;
  } mreq_t;

  function automatic int unsigned len_flits(input plen_e l);
    case (l)
      LEN1:    return 1;
      LEN2:    return 2;
      default: return 4;
    endcase
  endfunction

  // MOESI-F line states and events (Fig. 7 of the architecture description)
  typedef enum logic [2:0] { ST_I = 3'd0, ST_S = 3'd1, ST_E = 3'd2, ST_O = 3'd3,
                             ST_M = 3'd4, ST_F = 3'd5 } cstate_e;
  typedef enum logic [2:0] { EV_RD = 3'd0, EV_WR = 3'd1, EV_EVICT = 3'd2, EV_FORWARD = 3'd3,
                             EV_EXCLUSIVE = 3'd4, EV_OWN = 3'd5, EV_MODIFIED = 3'd6 } cevent_e;

  // Router id of block b's two routers: blocks 0..3 on row 0, 4..7 on row 1,
  // each block owning two adjacent columns. Router 0 of a block hosts the
  // core-side interface, router 1 the target-side interface.
  function automatic logic [3:0] blk_router(input logic [2:0] b, input logic which);
    logic [2:0] x;
    logic       y;
    x = {b[1:0], which};
    y = b[2];
    return {y, x};
  endfunction

endpackage
