// dma_engine: the tile's DMA, which moves bulk data between the L1 scratchpad and
// the NoC, and so to other tiles' L1 and to HBM.
//
// Transmit (one command at a time, dma_cmd_t):
//   FK_WRITE   read len words of L1 from src and send word i to address dst+i of
//              every tile in the rectangle [x_lo..x_hi] x [y_lo..y_hi]. A 1x1
//              rectangle is a unicast; a row or a column of tiles is a multicast
//              that the routers replicate flit by flit.
//   FK_RED_SUM / FK_RED_MAX  send len words as contributions to a row reduction
//              over columns [x_lo..x_hi] of this row, combined in the routers and
//              written to dst+i in the L1 of the tile at column root_x.
//   FK_HBM_WR  write len L1 words to HBM addresses dst+i.
//   FK_HBM_RD  request HBM words src+i; the replies are written to L1 at dst+i.
// HBM requests always go to the controller below this tile's own column (row
// HBM_ROW of the mesh); this matches the FlatAttention schedule, in which the
// diagonal tile of each column fetches from HBM, and is this design's choice.
// Receive: every FK_WRITE flit and every reduction result that the NoC delivers to
// this tile is written to L1 at the flit's address; rx_count counts them, so
// software can wait for a known number of words (the synchronisation the
// FlatAttention schedule needs after each multicast and reduction).
// Timing: one flit per cycle in each direction when the NoC and L1 allow it.
module dma_engine
  import flat_pkg::*;
#(
  parameter int unsigned HBM_ROW = 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  coord_t   my_x,
  input  coord_t   my_y,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  dma_cmd_t cmd,
  output logic     busy,
  output logic [31:0] rx_count,
  // L1
  output l1_req_t  rd_req,
  input  l1_rsp_t  rd_rsp,
  output l1_req_t  wr_req,
  input  l1_rsp_t  wr_rsp,
  // NoC local port
  output logic     noc_out_valid,
  input  logic     noc_out_ready,
  output flit_t    noc_out,
  input  logic     noc_in_valid,
  output logic     noc_in_ready,
  input  flit_t    noc_in
);
  logic     active_q;
  dma_cmd_t c_q;
  len_t     cnt_q;
  logic     start, is_rd, s_valid, s_ready, sr_done;
  word_t    s_data;
  logic     fire;

  assign cmd_ready = !active_q;
  assign busy      = active_q;
  assign start     = cmd_valid && !active_q;
  assign is_rd     = (c_q.kind == FK_HBM_RD);

  l1_stream_reader #(.DEPTH(4)) u_rd (
    .clk_i, .rst_ni, .start (start && (cmd.kind != FK_HBM_RD)), .base (cmd.src),
    .count (cmd.len), .done (sr_done), .l1_req (rd_req), .l1_rsp (rd_rsp),
    .out_valid (s_valid), .out_ready (s_ready), .out_data (s_data));

  always_comb begin
    noc_out        = '0;
    noc_out.kind   = c_q.kind;
    noc_out.src_x  = my_x;
    noc_out.src_y  = my_y;
    noc_out.x_lo   = c_q.x_lo;
    noc_out.x_hi   = c_q.x_hi;
    noc_out.y_lo   = c_q.y_lo;
    noc_out.y_hi   = c_q.y_hi;
    noc_out.root_x = c_q.root_x;
    noc_out.addr   = c_q.dst + addr_t'(cnt_q);
    noc_out.data   = s_data;
    if (c_q.kind inside {FK_HBM_RD, FK_HBM_WR}) begin
      noc_out.x_lo = my_x;
      noc_out.x_hi = my_x;
      noc_out.y_lo = coord_t'(HBM_ROW);
      noc_out.y_hi = coord_t'(HBM_ROW);
    end
    if (is_rd) begin
      noc_out.addr = c_q.src + addr_t'(cnt_q);
      noc_out.data = word_t'(addr_t'(c_q.dst + addr_t'(cnt_q)));
    end
    noc_out_valid = active_q && (is_rd || s_valid);
  end

  assign fire    = noc_out_valid && noc_out_ready;
  assign s_ready = active_q && !is_rd && noc_out_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      c_q      <= '0;
      cnt_q    <= '0;
    end else if (start) begin
      c_q      <= cmd;
      cnt_q    <= '0;
      active_q <= (cmd.len != '0);
    end else if (fire) begin
      cnt_q <= cnt_q + 1'b1;
      if (cnt_q + 1'b1 == c_q.len) active_q <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- receive
  always_comb begin
    wr_req       = '0;
    wr_req.req   = noc_in_valid;
    wr_req.we    = 1'b1;
    wr_req.addr  = noc_in.addr;
    wr_req.wdata = noc_in.data;
  end
  assign noc_in_ready = wr_rsp.gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                            rx_count <= '0;
    else if (noc_in_valid && noc_in_ready)  rx_count <= rx_count + 1'b1;
  end

  a_rx_kind: assert property (@(posedge clk_i) disable iff (!rst_ni)
    noc_in_valid |-> (noc_in.kind inside {FK_WRITE, FK_RED_SUM, FK_RED_MAX}));
endmodule
