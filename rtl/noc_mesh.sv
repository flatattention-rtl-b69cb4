// noc_mesh: the chip's 2D-mesh network on chip, MESH_X x MESH_Y noc_router
// instances with (x, y) = (column, row), row 0 at the north edge.
//
// Router (x,y) links east to (x+1,y) and south to (x,y+1). Each router's local
// port is brought out for the tile at the same position. The south ports of the
// bottom row are brought out for the HBM controllers on the south edge, whose
// position is row MESH_Y. The other edge ports are tied off: nothing enters
// there, and the routing never sends a flit out of them (checked by assertion).
// One hop takes one cycle.
module noc_mesh
  import flat_pkg::*;
#(
  parameter int unsigned MESH_X = 32,
  parameter int unsigned MESH_Y = 32,
  parameter int unsigned DEPTH  = 2
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  // tile local ports
  input  logic  tile_in_valid  [MESH_Y][MESH_X],
  output logic  tile_in_ready  [MESH_Y][MESH_X],
  input  flit_t tile_in        [MESH_Y][MESH_X],
  output logic  tile_out_valid [MESH_Y][MESH_X],
  input  logic  tile_out_ready [MESH_Y][MESH_X],
  output flit_t tile_out       [MESH_Y][MESH_X],
  // south edge (HBM controllers)
  output logic  south_out_valid [MESH_X],
  input  logic  south_out_ready [MESH_X],
  output flit_t south_out       [MESH_X],
  input  logic  south_in_valid  [MESH_X],
  output logic  south_in_ready  [MESH_X],
  input  flit_t south_in        [MESH_X]
);
  logic  iv [MESH_Y][MESH_X][NPORT];
  logic  ir [MESH_Y][MESH_X][NPORT];
  flit_t ifl[MESH_Y][MESH_X][NPORT];
  logic  ov [MESH_Y][MESH_X][NPORT];
  logic  orr[MESH_Y][MESH_X][NPORT];
  flit_t ofl[MESH_Y][MESH_X][NPORT];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      noc_router #(.DEPTH(DEPTH)) u_router (
        .clk_i, .rst_ni,
        .my_x (coord_t'(x)), .my_y (coord_t'(y)),
        .in_valid (iv[y][x]), .in_ready (ir[y][x]), .in_flit (ifl[y][x]),
        .out_valid (ov[y][x]), .out_ready (orr[y][x]), .out_flit (ofl[y][x]));

      // local
      assign iv [y][x][P_L]      = tile_in_valid[y][x];
      assign ifl[y][x][P_L]      = tile_in[y][x];
      assign tile_in_ready[y][x] = ir[y][x][P_L];
      assign tile_out_valid[y][x] = ov[y][x][P_L];
      assign tile_out[y][x]       = ofl[y][x][P_L];
      assign orr[y][x][P_L]       = tile_out_ready[y][x];

      // north input / output
      if (y > 0) begin : g_n
        assign iv [y][x][P_N] = ov [y-1][x][P_S];
        assign ifl[y][x][P_N] = ofl[y-1][x][P_S];
        assign orr[y][x][P_N] = ir [y-1][x][P_S];
      end else begin : g_n_edge
        assign iv [y][x][P_N] = 1'b0;
        assign ifl[y][x][P_N] = '0;
        assign orr[y][x][P_N] = 1'b1;
        a_no_n: assert property (@(posedge clk_i) disable iff (!rst_ni) !ov[y][x][P_N]);
      end
      // south
      if (y < MESH_Y - 1) begin : g_s
        assign iv [y][x][P_S] = ov [y+1][x][P_N];
        assign ifl[y][x][P_S] = ofl[y+1][x][P_N];
        assign orr[y][x][P_S] = ir [y+1][x][P_N];
      end else begin : g_s_edge
        assign iv [y][x][P_S]  = south_in_valid[x];
        assign ifl[y][x][P_S]  = south_in[x];
        assign south_in_ready[x] = ir[y][x][P_S];
        assign south_out_valid[x] = ov[y][x][P_S];
        assign south_out[x]       = ofl[y][x][P_S];
        assign orr[y][x][P_S]     = south_out_ready[x];
      end
      // west
      if (x > 0) begin : g_w
        assign iv [y][x][P_W] = ov [y][x-1][P_E];
        assign ifl[y][x][P_W] = ofl[y][x-1][P_E];
        assign orr[y][x][P_W] = ir [y][x-1][P_E];
      end else begin : g_w_edge
        assign iv [y][x][P_W] = 1'b0;
        assign ifl[y][x][P_W] = '0;
        assign orr[y][x][P_W] = 1'b1;
        a_no_w: assert property (@(posedge clk_i) disable iff (!rst_ni) !ov[y][x][P_W]);
      end
      // east
      if (x < MESH_X - 1) begin : g_e
        assign iv [y][x][P_E] = ov [y][x+1][P_W];
        assign ifl[y][x][P_E] = ofl[y][x+1][P_W];
        assign orr[y][x][P_E] = ir [y][x+1][P_W];
      end else begin : g_e_edge
        assign iv [y][x][P_E] = 1'b0;
        assign ifl[y][x][P_E] = '0;
        assign orr[y][x][P_E] = 1'b1;
        a_no_e: assert property (@(posedge clk_i) disable iff (!rst_ni) !ov[y][x][P_E]);
      end
    end
  end
endmodule
