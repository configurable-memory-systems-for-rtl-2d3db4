// mesh_router: one router of an inter-tile mesh network.
//
// Each tile has five of these, one per network (core-to-core, credits, memory
// responses and two memory request networks), as in the tile figure. Ports:
// 0 local, 1 north (y+1), 2 east (x+1), 3 south (y-1), 4 west (x-1).
// Routing is dimension-ordered, first along y then along x, which is
// deadlock-free on a mesh. Tile columns sit at x >= 1 and the memory
// controller at (0,0), so a flit for the memory controller travels to row 0
// and then leaves westward through tile (1,0). Switching is wormhole: an
// output is held by one input until its end-of-packet flit passes. Each
// output has one register, so a hop between adjacent tiles takes one clock
// cycle, as in the paper. Routing order and port numbering are this design's
// choices.
module mesh_router
  import loki_pkg::*;
#(
  parameter type T = logic [31:0]
) (
  input  logic       clk,
  input  logic       rst_n,
  input  coord_t     my_coord,
  input  logic [4:0] in_valid,
  output logic [4:0] in_ready,
  input  coord_t     in_dst  [5],
  input  T           in_data [5],
  input  logic [4:0] in_eop,
  output logic [4:0] out_valid,
  input  logic [4:0] out_ready,
  output coord_t     out_dst  [5],
  output T           out_data [5],
  output logic [4:0] out_eop
);
  typedef struct packed {
    coord_t dst;
    T       payload;
  } flit_t;

  flit_t      xin  [5];
  flit_t      xout [5];
  logic [2:0] route [5];
  logic [2:0] src_unused [5];

  always_comb begin
    for (int p = 0; p < 5; p++) begin
      xin[p] = '{dst: in_dst[p], payload: in_data[p]};
      if      (in_dst[p].y > my_coord.y) route[p] = 3'd1;
      else if (in_dst[p].y < my_coord.y) route[p] = 3'd3;
      else if (in_dst[p].x > my_coord.x) route[p] = 3'd2;
      else if (in_dst[p].x < my_coord.x) route[p] = 3'd4;
      else                               route[p] = 3'd0;
    end
    for (int p = 0; p < 5; p++) begin
      out_dst[p]  = xout[p].dst;
      out_data[p] = xout[p].payload;
    end
  end

  crossbar #(.N_IN(5), .N_OUT(5), .T(flit_t)) u_xbar (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(xin), .in_dest(route), .in_eop,
    .out_valid, .out_ready, .out_data(xout), .out_eop, .out_src(src_unused)
  );
endmodule
