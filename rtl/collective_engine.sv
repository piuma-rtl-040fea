// collective_engine: barrier and reduction over NPART participants.
//
// Each participant contributes once per collective by pulsing arrive[p] with
// its value. The engine folds the values with the selected operation (add,
// signed min or signed max; a barrier ignores the values) as they arrive, in
// any order. When the last participant has arrived, it pulses `release` for
// one cycle with the result, which every participant takes; the next
// collective can start in the following cycle. Two levels are used in a
// socket: one engine per block over the block's cores and one over the eight
// blocks, whose `release` feeds back to the block engines' participants.
// `op` must be stable while a collective is in progress.
//
// Hardware barriers and reductions follow the paper; the operation set and the
// two-level arrangement are this design's own choices.
module collective_engine #(
  parameter int NPART = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [1:0]       op,            // 0 add / barrier, 1 min, 2 max
  input  logic [NPART-1:0] arrive,
  input  logic [63:0]      value [NPART],
  output logic             release_o,
  output logic [63:0]      result
);
  logic [NPART-1:0] seen;
  logic [63:0]      acc;
  logic             have;

  function automatic logic [63:0] fold(input logic [1:0] o, input logic [63:0] a,
                                       input logic [63:0] b);
    case (o)
      2'd1:    return ($signed(b) < $signed(a)) ? b : a;
      2'd2:    return ($signed(b) > $signed(a)) ? b : a;
      default: return a + b;
    endcase
  endfunction

  logic [NPART-1:0] s;
  logic [63:0]      a;
  logic             hv;
  always_comb begin
    s  = seen;
    a  = acc;
    hv = have;
    for (int p = 0; p < NPART; p++) begin
      if (arrive[p] && !s[p]) begin
        s[p] = 1'b1;
        a    = hv ? fold(op, a, value[p]) : value[p];
        hv   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= '0; acc <= '0; have <= 1'b0; release_o <= 1'b0; result <= '0;
    end else begin
      release_o <= &s;
      if (&s) begin
        result <= a;
        seen   <= '0;
        have   <= 1'b0;
        acc    <= '0;
      end else begin
        seen <= s;
        have <= hv;
        acc  <= a;
      end
    end
  end

  a_no_double_arrive: assert property (@(posedge clk) disable iff (!rst_n)
    (arrive & seen) == '0);
endmodule
