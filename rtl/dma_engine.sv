// dma_engine: the block's DMA offload engine for strided copy, gather and scatter.
//
// A core starts an operation with one command and carries on with other work;
// `done` pulses when the last element has been written. Elements are 8-byte
// words; i runs from 0 to count-1:
//   DMA_COPY    dst[8i]        <- src[i*stride]        (strided copy)
//   DMA_GATHER  dst[8i]        <- base[8*idx[8i]]      (gather through an index list)
//   DMA_SCATTER base[8*idx[8i]] <- src[8i]             (scatter through an index list)
// With gather only the gathered elements move to the destination; the index
// list itself never leaves memory. The engine uses one memory port with one
// access outstanding: it raises m_valid, waits for m_ready, then waits for
// m_resp_valid (read data or write acknowledge) before the next access.
//
// The three operations follow the paper; the command format, 8-byte element
// size and one-outstanding-access port are this design's choices. The
// compressed-sparse and transform operations the paper also mentions are not
// implemented.
module dma_engine
  import piuma_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [1:0]        cmd_mode,      // 0 copy, 1 gather, 2 scatter
  input  logic [ADDR_W-1:0] cmd_src,
  input  logic [ADDR_W-1:0] cmd_dst,
  input  logic [ADDR_W-1:0] cmd_idx,
  input  logic [ADDR_W-1:0] cmd_base,
  input  logic [ADDR_W-1:0] cmd_stride,
  input  logic [31:0]       cmd_count,
  output logic              busy,
  output logic              done,
  // memory port
  output logic              m_valid,
  input  logic              m_ready,
  output mreq_t             m_req,
  input  logic              m_resp_valid,
  input  logic [63:0]       m_resp_data
);
  localparam logic [1:0] DMA_COPY = 2'd0, DMA_GATHER = 2'd1, DMA_SCATTER = 2'd2;

  typedef enum logic [2:0] { D_IDLE, D_IDX, D_SRC, D_DATA, D_WR } ph_e;
  ph_e         ph;
  logic        waiting;     // access issued, response pending
  logic [1:0]  mode;
  logic [ADDR_W-1:0] src, dst, idx, base, stride;
  logic [31:0] n, i;
  logic [63:0] k, v;

  assign cmd_ready = (ph == D_IDLE);
  assign busy      = (ph != D_IDLE);

  always_comb begin
    m_req   = '0;
    m_valid = (ph != D_IDLE) && !waiting;
    case (ph)
      D_IDX:  m_req.addr = idx + ADDR_W'({i, 3'b000});
      D_SRC:  m_req.addr = (mode == DMA_COPY) ? src + ADDR_W'(i) * stride
                                              : src + ADDR_W'({i, 3'b000});
      D_DATA: m_req.addr = base + ADDR_W'({k[36:0], 3'b000});
      D_WR: begin
        m_req.we    = 1'b1;
        m_req.wdata = v;
        m_req.addr  = (mode == DMA_SCATTER) ? base + ADDR_W'({k[36:0], 3'b000})
                                            : dst + ADDR_W'({i, 3'b000});
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= D_IDLE; waiting <= 1'b0; mode <= '0; src <= '0; dst <= '0; idx <= '0;
      base <= '0; stride <= '0; n <= '0; i <= '0; k <= '0; v <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (ph == D_IDLE) begin
        if (cmd_valid) begin
          mode <= cmd_mode; src <= cmd_src; dst <= cmd_dst; idx <= cmd_idx;
          base <= cmd_base; stride <= cmd_stride; n <= cmd_count; i <= '0;
          if (cmd_count == 0) done <= 1'b1;
          else ph <= (cmd_mode == DMA_COPY) ? D_SRC : (cmd_mode == DMA_GATHER) ? D_IDX : D_SRC;
        end
      end else if (!waiting) begin
        if (m_ready) waiting <= 1'b1;
      end else if (m_resp_valid) begin
        waiting <= 1'b0;
        case (ph)
          D_SRC:  begin v <= m_resp_data; ph <= (mode == DMA_SCATTER) ? D_IDX : D_WR; end
          D_IDX:  begin k <= m_resp_data; ph <= (mode == DMA_GATHER) ? D_DATA : D_WR; end
          D_DATA: begin v <= m_resp_data; ph <= D_WR; end
          D_WR: begin
            i <= i + 1;
            if (i + 1 == n) begin ph <= D_IDLE; done <= 1'b1; end
            else ph <= (mode == DMA_GATHER) ? D_IDX : D_SRC;
          end
          default: ph <= D_IDLE;
        endcase
      end
    end
  end
endmodule
