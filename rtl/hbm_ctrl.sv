// hbm_ctrl: memory controller of one HBM channel, attached below the bottom router
// of one mesh column (the south edge of the chip).
//
// It takes request flits from the NoC: FK_HBM_WR writes the flit's word at HBM word
// address `addr`; FK_HBM_RD reads `addr` and sends the word back as an FK_WRITE
// flit to the requesting tile, at the L1 address carried in the request's data
// bits. Replies travel north in this column, so requesters sit in the same column
// (the DMA always addresses its own column's channel).
// Channel side: a valid/ready request port (we, addr, wdata) and an in-order read
// response port without back-pressure. At most MAX_OUTST reads are in flight; a
// response buffer of the same depth holds every reply that the NoC cannot take
// at once, so the channel is never stalled by the NoC. The default depth of 128
// covers the paper's ~200-cycle HBM latency at half a word (64 B) per cycle per
// channel (2 TB/s over 32 channels at 965 MHz), so a single channel can stream at
// its full rate. Timing: requests pass
// through in the cycle they arrive when the channel is ready; replies leave one
// cycle after the channel returns them. The paper places HBM controllers at the
// mesh boundary but does not describe them; this controller is this design's own.
module hbm_ctrl
  import flat_pkg::*;
#(
  parameter int unsigned HBM_ROW   = 32,
  parameter int unsigned MAX_OUTST = 128
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  coord_t my_x,
  // NoC side
  input  logic   req_valid,
  output logic   req_ready,
  input  flit_t  req,
  output logic   rsp_valid,
  input  logic   rsp_ready,
  output flit_t  rsp,
  // HBM channel side
  output logic   hbm_req_valid,
  input  logic   hbm_req_ready,
  output logic   hbm_req_we,
  output addr_t  hbm_req_addr,
  output word_t  hbm_req_wdata,
  input  logic   hbm_rsp_valid,
  input  word_t  hbm_rsp_rdata
);
  typedef struct packed {
    coord_t x, y;
    addr_t  l1_addr;
  } reply_t;

  logic   is_rd, info_ready, info_valid, data_valid, data_ready_in, fire;
  reply_t info_in, info;
  word_t  data;

  assign is_rd = (req.kind == FK_HBM_RD);

  assign hbm_req_valid = req_valid && (!is_rd || info_ready);
  assign hbm_req_we    = !is_rd;
  assign hbm_req_addr  = req.addr;
  assign hbm_req_wdata = req.data;
  assign req_ready     = hbm_req_ready && (!is_rd || info_ready);
  assign fire          = hbm_req_valid && hbm_req_ready;

  assign info_in = '{x: req.src_x, y: req.src_y, l1_addr: req.data[ADDR_W-1:0]};

  sync_fifo #(.T(reply_t), .DEPTH(MAX_OUTST)) u_info (
    .clk_i, .rst_ni,
    .in_valid (fire && is_rd), .in_ready (info_ready), .in_data (info_in),
    .out_valid (info_valid), .out_ready (rsp_valid && rsp_ready), .out_data (info),
    .count ());

  sync_fifo #(.T(word_t), .DEPTH(MAX_OUTST)) u_data (
    .clk_i, .rst_ni,
    .in_valid (hbm_rsp_valid), .in_ready (data_ready_in), .in_data (hbm_rsp_rdata),
    .out_valid (data_valid), .out_ready (rsp_valid && rsp_ready), .out_data (data),
    .count ());

  always_comb begin
    rsp        = '0;
    rsp.kind   = FK_WRITE;
    rsp.src_x  = my_x;
    rsp.src_y  = coord_t'(HBM_ROW);
    rsp.x_lo   = info.x;
    rsp.x_hi   = info.x;
    rsp.y_lo   = info.y;
    rsp.y_hi   = info.y;
    rsp.addr   = info.l1_addr;
    rsp.data   = data;
  end
  assign rsp_valid = info_valid && data_valid;

  a_kind:      assert property (@(posedge clk_i) disable iff (!rst_ni)
    req_valid |-> (req.kind inside {FK_HBM_RD, FK_HBM_WR}));
  a_column:    assert property (@(posedge clk_i) disable iff (!rst_ni)
    (req_valid && is_rd) |-> (req.src_x == my_x));
  a_no_spill:  assert property (@(posedge clk_i) disable iff (!rst_ni)
    hbm_rsp_valid |-> data_ready_in);
endmodule
