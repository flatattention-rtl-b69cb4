// flat_tile: one compute tile of the accelerator: matrix engine, vector engine,
// DMA engine, local interconnect and banked L1 scratchpad, plus its port to the
// NoC router at the same mesh position.
//
// Commands arrive on a single command port (tile_cmd_t, valid/ready); `unit`
// selects the DMA, matrix engine or vector engine, and the command is accepted
// when that unit is idle, so the three units run concurrently, which is what the
// asynchronous FlatAttention schedule needs (matrix work of one head overlapping
// DMA and Softmax work of the other). In the paper a scalar RISC-V core in the
// tile issues these operations; this tile exposes the command port instead.
//
// L1 ports on the interconnect, in priority order: 0 NoC receive (DMA write),
// 1 DMA transmit read, 2/3/4 matrix engine A/B/C, 5/6 vector engine read/write.
// Status: busy per unit {VE, ME, DMA}, and the number of words received from the NoC.
module flat_tile
  import flat_pkg::*;
#(
  parameter int unsigned HBM_ROW   = 32,
  parameter int unsigned NBANKS    = 4,
  parameter int unsigned BANK_ROWS = 768
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  coord_t    my_x,
  input  coord_t    my_y,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  tile_cmd_t cmd,
  output logic [2:0]  busy,
  output logic [31:0] rx_count,
  // NoC local port
  output logic      noc_out_valid,
  input  logic      noc_out_ready,
  output flit_t     noc_out,
  input  logic      noc_in_valid,
  output logic      noc_in_ready,
  input  flit_t     noc_in
);
  localparam int unsigned NPORTS = 7;
  localparam int unsigned RW = $clog2(BANK_ROWS);

  l1_req_t req [NPORTS];
  l1_rsp_t rsp [NPORTS];
  logic  [NBANKS-1:0] bank_req, bank_we;
  logic  [RW-1:0]     bank_row [NBANKS];
  word_t bank_wdata [NBANKS], bank_rdata [NBANKS];
  logic  dma_ready, me_ready, ve_ready;

  always_comb begin
    unique case (cmd.unit)
      UNIT_DMA: cmd_ready = dma_ready;
      UNIT_ME:  cmd_ready = me_ready;
      UNIT_VE:  cmd_ready = ve_ready;
      default:  cmd_ready = 1'b1;
    endcase
  end

  dma_engine #(.HBM_ROW(HBM_ROW)) u_dma (
    .clk_i, .rst_ni, .my_x, .my_y,
    .cmd_valid (cmd_valid && (cmd.unit == UNIT_DMA)), .cmd_ready (dma_ready), .cmd (cmd.dma),
    .busy (busy[0]), .rx_count,
    .rd_req (req[1]), .rd_rsp (rsp[1]), .wr_req (req[0]), .wr_rsp (rsp[0]),
    .noc_out_valid, .noc_out_ready, .noc_out, .noc_in_valid, .noc_in_ready, .noc_in);

  matrix_engine u_me (
    .clk_i, .rst_ni,
    .cmd_valid (cmd_valid && (cmd.unit == UNIT_ME)), .cmd_ready (me_ready), .cmd (cmd.me),
    .busy (busy[1]),
    .a_req (req[2]), .a_rsp (rsp[2]), .b_req (req[3]), .b_rsp (rsp[3]),
    .c_req (req[4]), .c_rsp (rsp[4]));

  vector_engine u_ve (
    .clk_i, .rst_ni,
    .cmd_valid (cmd_valid && (cmd.unit == UNIT_VE)), .cmd_ready (ve_ready), .cmd (cmd.ve),
    .busy (busy[2]),
    .rd_req (req[5]), .rd_rsp (rsp[5]), .wr_req (req[6]), .wr_rsp (rsp[6]));

  l1_xbar #(.NPORTS(NPORTS), .NBANKS(NBANKS), .BANK_ROWS(BANK_ROWS)) u_xbar (
    .clk_i, .rst_ni, .req_i (req), .rsp_o (rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  l1_mem #(.NBANKS(NBANKS), .BANK_ROWS(BANK_ROWS)) u_l1 (
    .clk_i, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
endmodule
