// l1_xbar: the tile-local interconnect between the L1 banks and the units that
// use them (DMA, matrix engine, vector engine).
//
// NPORTS master ports, each a req/we/addr/wdata request (l1_req_t) answered by
// gnt in the same cycle and, for reads, rvalid/rdata one cycle later (l1_rsp_t).
// The bank of a request is addr % NBANKS. Each bank grants one request per cycle,
// the lowest-numbered port first (fixed priority); a port that loses waits with its
// request held. Distinct banks serve distinct ports in the same cycle, so up to
// NBANKS words move per cycle. Fixed priority is this design's choice.
module l1_xbar
  import flat_pkg::*;
#(
  parameter int unsigned NPORTS    = 6,
  parameter int unsigned NBANKS    = 4,
  parameter int unsigned BANK_ROWS = 768
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  l1_req_t req_i [NPORTS],
  output l1_rsp_t rsp_o [NPORTS],
  // bank side
  output logic    [NBANKS-1:0] bank_req,
  output logic    [NBANKS-1:0] bank_we,
  output logic    [$clog2(BANK_ROWS)-1:0] bank_row [NBANKS],
  output word_t   bank_wdata [NBANKS],
  input  word_t   bank_rdata [NBANKS]
);
  localparam int unsigned BW = $clog2(NBANKS);
  localparam int unsigned PW = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  logic [NPORTS-1:0] gnt;
  logic [NBANKS-1:0] rd_pending_q;
  logic [PW-1:0]     rd_port_q [NBANKS];
  logic [PW-1:0]     win [NBANKS];

  always_comb begin
    gnt = '0;
    for (int b = 0; b < NBANKS; b++) begin
      bank_req[b]   = 1'b0;
      bank_we[b]    = 1'b0;
      bank_row[b]   = '0;
      bank_wdata[b] = '0;
      win[b]        = '0;
      for (int p = NPORTS - 1; p >= 0; p--) begin
        if (req_i[p].req && (req_i[p].addr[BW-1:0] == BW'(b))) begin
          win[b] = PW'(p);
          bank_req[b] = 1'b1;
        end
      end
      if (bank_req[b]) begin
        gnt[win[b]]   = 1'b1;
        bank_we[b]    = req_i[win[b]].we;
        bank_row[b]   = req_i[win[b]].addr[BW +: $clog2(BANK_ROWS)];
        bank_wdata[b] = req_i[win[b]].wdata;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_pending_q <= '0;
      for (int b = 0; b < NBANKS; b++) rd_port_q[b] <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        rd_pending_q[b] <= bank_req[b] && !bank_we[b];
        rd_port_q[b]    <= win[b];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp_o[p].gnt    = gnt[p];
      rsp_o[p].rvalid = 1'b0;
      rsp_o[p].rdata  = '0;
    end
    for (int b = 0; b < NBANKS; b++) begin
      if (rd_pending_q[b]) begin
        rsp_o[rd_port_q[b]].rvalid = 1'b1;
        rsp_o[rd_port_q[b]].rdata  = bank_rdata[b];
      end
    end
  end

endmodule
