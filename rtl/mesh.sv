// mesh: the on-die 2-D mesh network of a PIUMA socket.
//
// MX x MY routers (default 8 x 2, sixteen switches as in the socket floorplan)
// are joined by bidirectional links between neighbours: port E of router
// (x,y) feeds port W of (x+1,y), port S of (x,y) feeds port N of (x,y+1), and
// the credits travel the opposite way. Ports on the mesh edge are unused:
// their inputs are held idle and XY routing never selects them. The local
// ports 4..NP-1 of every router are brought out on the loc_* arrays, indexed
// by router id r = y*MX + x and local port l (router port 4+l).
//
// Mesh shape and link wiring follow the paper's description of a 2-D mesh of
// routers; the 8 x 2 arrangement is read from the socket diagram.
module mesh
  import piuma_pkg::*;
#(
  parameter int MX        = MESH_X,
  parameter int MY        = MESH_Y,
  parameter int NP        = NPORTS,
  parameter int BUF_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t loc_in_flit   [MX*MY][NP-4],
  input  logic  loc_in_valid  [MX*MY][NP-4],
  output logic  loc_in_credit [MX*MY][NP-4],
  output flit_t loc_out_flit  [MX*MY][NP-4],
  output logic  loc_out_valid [MX*MY][NP-4],
  input  logic  loc_out_credit[MX*MY][NP-4]
);
  localparam int NR = MX * MY;

  flit_t r_in_flit   [NR][NP];
  logic  r_in_valid  [NR][NP];
  logic  r_in_credit [NR][NP];
  flit_t r_out_flit  [NR][NP];
  logic  r_out_valid [NR][NP];
  logic  r_out_credit[NR][NP];

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      localparam int R = y * MX + x;
      router #(.NP(NP), .BUF_DEPTH(BUF_DEPTH), .MY_X(3'(x)), .MY_Y(1'(y))) u_r (
        .clk, .rst_n,
        .in_flit(r_in_flit[R]), .in_valid(r_in_valid[R]), .in_credit(r_in_credit[R]),
        .out_flit(r_out_flit[R]), .out_valid(r_out_valid[R]), .out_credit(r_out_credit[R]));

      // North input comes from (x, y-1)'s South output
      if (y > 0) begin : g_n
        assign r_in_flit[R][P_N]    = r_out_flit[R-MX][P_S];
        assign r_in_valid[R][P_N]   = r_out_valid[R-MX][P_S];
        assign r_out_credit[R][P_N] = r_in_credit[R-MX][P_S];
      end else begin : g_n0
        assign r_in_flit[R][P_N]    = '0;
        assign r_in_valid[R][P_N]   = 1'b0;
        assign r_out_credit[R][P_N] = 1'b0;
      end
      if (y < MY - 1) begin : g_s
        assign r_in_flit[R][P_S]    = r_out_flit[R+MX][P_N];
        assign r_in_valid[R][P_S]   = r_out_valid[R+MX][P_N];
        assign r_out_credit[R][P_S] = r_in_credit[R+MX][P_N];
      end else begin : g_s0
        assign r_in_flit[R][P_S]    = '0;
        assign r_in_valid[R][P_S]   = 1'b0;
        assign r_out_credit[R][P_S] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign r_in_flit[R][P_W]    = r_out_flit[R-1][P_E];
        assign r_in_valid[R][P_W]   = r_out_valid[R-1][P_E];
        assign r_out_credit[R][P_W] = r_in_credit[R-1][P_E];
      end else begin : g_w0
        assign r_in_flit[R][P_W]    = '0;
        assign r_in_valid[R][P_W]   = 1'b0;
        assign r_out_credit[R][P_W] = 1'b0;
      end
      if (x < MX - 1) begin : g_e
        assign r_in_flit[R][P_E]    = r_out_flit[R+1][P_W];
        assign r_in_valid[R][P_E]   = r_out_valid[R+1][P_W];
        assign r_out_credit[R][P_E] = r_in_credit[R+1][P_W];
      end else begin : g_e0
        assign r_in_flit[R][P_E]    = '0;
        assign r_in_valid[R][P_E]   = 1'b0;
        assign r_out_credit[R][P_E] = 1'b0;
      end
      for (genvar l = 0; l < NP - 4; l++) begin : g_l
        assign r_in_flit[R][4+l]    = loc_in_flit[R][l];
        assign r_in_valid[R][4+l]   = loc_in_valid[R][l];
        assign loc_in_credit[R][l]  = r_in_credit[R][4+l];
        assign loc_out_flit[R][l]   = r_out_flit[R][4+l];
        assign loc_out_valid[R][l]  = r_out_valid[R][4+l];
        assign r_out_credit[R][4+l] = loc_out_credit[R][l];
      end
    end
  end
endmodule
