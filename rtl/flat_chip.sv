// flat_chip: the tile-based many-PE accelerator, MESH_X x MESH_Y tiles on a
// 2D-mesh NoC with fabric multicast and reduction, and one HBM channel
// controller below each column on the south edge.
//
// The evaluated chip has 32 x 32 tiles and 32 HBM channels. The default here is a
// 16 x 16 quarter of it (16 channels, one per column): a 32 x 32 instance is the
// same RTL with MESH_X = MESH_Y = 32. Verilator elaborates every tile separately:
// it needs 0.35, 1.3 and 5.1 GB at 4x4, 8x8 and 16x16, so about 20 GB at 32x32,
// on top of what synthesis of the same design takes at the same time; the default
// is the largest size that stays within the memory of the build machines. Everything else is
// at the evaluated size: 1024-bit NoC links, tiles with a 32x16 matrix engine, a
// 64-lane vector engine and 384 KiB
// of L1 in four 128-byte-wide banks.
//
// Control: one command port reaches every tile. A command (tile_cmd_t) names a
// rectangle of tiles [x_lo..x_hi] x [y_lo..y_hi] and one unit; it is taken, by all
// those tiles in the same cycle, when the unit is idle in every one of them
// (cmd_ready). A single tile, a diagonal tile of a group, a row or a whole group
// can so be driven with one command. Per-tile status: busy {VE, ME, DMA} and the
// count of words each tile has received from the NoC.
// HBM: each channel controller exposes its request/response port; the DRAM
// itself is outside this design.
module flat_chip
  import flat_pkg::*;
#(
  parameter int unsigned MESH_X    = 16,
  parameter int unsigned MESH_Y    = 16,
  parameter int unsigned BANK_ROWS = 768,
  parameter int unsigned MAX_OUTST = 128
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  tile_cmd_t   cmd,
  output logic [2:0]  tile_busy     [MESH_Y][MESH_X],
  output logic [31:0] tile_rx_count [MESH_Y][MESH_X],
  // HBM channels, one per column
  output logic  hbm_req_valid [MESH_X],
  input  logic  hbm_req_ready [MESH_X],
  output logic  hbm_req_we    [MESH_X],
  output addr_t hbm_req_addr  [MESH_X],
  output word_t hbm_req_wdata [MESH_X],
  input  logic  hbm_rsp_valid [MESH_X],
  input  word_t hbm_rsp_rdata [MESH_X]
);
  logic  t_out_valid [MESH_Y][MESH_X], t_out_ready [MESH_Y][MESH_X];
  flit_t t_out       [MESH_Y][MESH_X];
  logic  t_in_valid  [MESH_Y][MESH_X], t_in_ready  [MESH_Y][MESH_X];
  flit_t t_in        [MESH_Y][MESH_X];
  logic  s_out_valid [MESH_X], s_out_ready [MESH_X], s_in_valid [MESH_X], s_in_ready [MESH_X];
  flit_t s_out [MESH_X], s_in [MESH_X];
  logic  sel   [MESH_Y][MESH_X];
  logic  t_rdy [MESH_Y][MESH_X];

  // command broadcast: ready when every selected tile can take it
  always_comb begin
    cmd_ready = 1'b1;
    for (int y = 0; y < MESH_Y; y++)
      for (int x = 0; x < MESH_X; x++)
        if (sel[y][x] && !t_rdy[y][x]) cmd_ready = 1'b0;
  end

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      assign sel[y][x] = (coord_t'(x) >= cmd.x_lo) && (coord_t'(x) <= cmd.x_hi) &&
                         (coord_t'(y) >= cmd.y_lo) && (coord_t'(y) <= cmd.y_hi);
      flat_tile #(.HBM_ROW(MESH_Y), .BANK_ROWS(BANK_ROWS)) u_tile (
        .clk_i, .rst_ni, .my_x (coord_t'(x)), .my_y (coord_t'(y)),
        .cmd_valid (cmd_valid && cmd_ready && sel[y][x]), .cmd_ready (t_rdy[y][x]), .cmd,
        .busy (tile_busy[y][x]), .rx_count (tile_rx_count[y][x]),
        .noc_out_valid (t_in_valid[y][x]), .noc_out_ready (t_in_ready[y][x]), .noc_out (t_in[y][x]),
        .noc_in_valid (t_out_valid[y][x]), .noc_in_ready (t_out_ready[y][x]), .noc_in (t_out[y][x]));
    end
  end

  noc_mesh #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_noc (
    .clk_i, .rst_ni,
    .tile_in_valid (t_in_valid), .tile_in_ready (t_in_ready), .tile_in (t_in),
    .tile_out_valid (t_out_valid), .tile_out_ready (t_out_ready), .tile_out (t_out),
    .south_out_valid (s_out_valid), .south_out_ready (s_out_ready), .south_out (s_out),
    .south_in_valid (s_in_valid), .south_in_ready (s_in_ready), .south_in (s_in));

  for (genvar x = 0; x < MESH_X; x++) begin : g_hbm
    hbm_ctrl #(.HBM_ROW(MESH_Y), .MAX_OUTST(MAX_OUTST)) u_hbm (
      .clk_i, .rst_ni, .my_x (coord_t'(x)),
      .req_valid (s_out_valid[x]), .req_ready (s_out_ready[x]), .req (s_out[x]),
      .rsp_valid (s_in_valid[x]), .rsp_ready (s_in_ready[x]), .rsp (s_in[x]),
      .hbm_req_valid (hbm_req_valid[x]), .hbm_req_ready (hbm_req_ready[x]),
      .hbm_req_we (hbm_req_we[x]), .hbm_req_addr (hbm_req_addr[x]),
      .hbm_req_wdata (hbm_req_wdata[x]),
      .hbm_rsp_valid (hbm_rsp_valid[x]), .hbm_rsp_rdata (hbm_rsp_rdata[x]));
  end
endmodule
