// l1_stream_reader: reads `count` consecutive L1 words starting at `base` through
// one l1_xbar port and presents them, in order, on a valid/ready stream.
//
// A read is issued whenever the DEPTH-entry prefetch buffer has room for it and
// the data of the read still in flight, so with no bank conflicts it sustains one
// word per cycle. `start` (one cycle) loads base/count; `done` is high when every
// word has been issued (the last ones may still be in the buffer).
module l1_stream_reader
  import flat_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    start,
  input  addr_t   base,
  input  len_t    count,
  output logic    done,
  output l1_req_t l1_req,
  input  l1_rsp_t l1_rsp,
  output logic    out_valid,
  input  logic    out_ready,
  output word_t   out_data
);
  addr_t addr_q;
  len_t  left_q;
  logic  inflight_q;
  logic  [$clog2(DEPTH+1)-1:0] fcount;
  logic  fin_ready;

  assign done = (left_q == '0);

  always_comb begin
    l1_req       = '0;
    l1_req.addr  = addr_q;
    l1_req.req   = (left_q != '0) &&
                   (32'(fcount) + (inflight_q ? 32'd1 : 32'd0) < DEPTH);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      addr_q     <= '0;
      left_q     <= '0;
      inflight_q <= 1'b0;
    end else begin
      inflight_q <= l1_req.req && l1_rsp.gnt;
      if (start) begin
        addr_q <= base;
        left_q <= count;
      end else if (l1_req.req && l1_rsp.gnt) begin
        addr_q <= addr_q + 1'b1;
        left_q <= left_q - 1'b1;
      end
    end
  end

  sync_fifo #(.T(word_t), .DEPTH(DEPTH)) u_buf (
    .clk_i, .rst_ni,
    .in_valid (l1_rsp.rvalid), .in_ready (fin_ready), .in_data (l1_rsp.rdata),
    .out_valid, .out_ready, .out_data, .count (fcount)
  );

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    l1_rsp.rvalid |-> fin_ready);
endmodule
