// tb_hbm_ctrl: the HBM controller of column 2 between a NoC stand-in and the
// channel model. It writes 64 words through FK_HBM_WR flits, reads them back with
// FK_HBM_RD flits from two requesters of the column and checks that each reply is
// an FK_WRITE flit addressed to the requester, at the L1 address carried by the
// request, with the written data. The NoC side stalls at random so that replies
// pile up in the response buffer; the channel sees at most MAX_OUTST reads in
// flight. Read throughput must reach one word per cycle when nothing stalls.
module tb_hbm_ctrl;
  import flat_pkg::*;
  localparam int LAT = 30, MAXO = 32, NW = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  flit_t req, rsp;
  logic h_valid, h_ready, h_we, h_rvalid;
  addr_t h_addr;
  word_t h_wdata, h_rdata;
  flit_t txq [$], rxq [$];
  int stall_pct = 0;
  int checks = 0, failures = 0, max_outst = 0, outst = 0;
  always #5 clk = ~clk;

  hbm_ctrl #(.HBM_ROW(8), .MAX_OUTST(MAXO)) dut (
    .clk_i(clk), .rst_ni(rst_n), .my_x(6'd2),
    .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp,
    .hbm_req_valid(h_valid), .hbm_req_ready(h_ready), .hbm_req_we(h_we),
    .hbm_req_addr(h_addr), .hbm_req_wdata(h_wdata),
    .hbm_rsp_valid(h_rvalid), .hbm_rsp_rdata(h_rdata));
  hbm_model #(.LAT(LAT), .WORDS(256)) u_hbm (
    .clk_i(clk), .rst_ni(rst_n), .req_valid(h_valid), .req_ready(h_ready), .req_we(h_we),
    .req_addr(h_addr), .req_wdata(h_wdata), .rsp_valid(h_rvalid), .rsp_rdata(h_rdata));

  logic rdy_prev = 0;
  always @(negedge clk) begin
    if (req_valid && rdy_prev) void'(txq.pop_front());
    req_valid = (txq.size() != 0);
    req       = (txq.size() != 0) ? txq[0] : '0;
    rdy_prev  = req_ready;
    if (rsp_valid && rsp_ready) rxq.push_back(rsp);
    rsp_ready = ($urandom % 100) >= stall_pct;
  end
  always @(posedge clk) begin
    if (h_valid && h_ready && !h_we) outst++;
    if (rsp_valid && rsp_ready) outst--;
    if (outst > max_outst) max_outst = outst;
  end

  function automatic word_t pat(int i);
    word_t w;
    for (int k = 0; k < 32; k++) w[k*32 +: 32] = 32'(i * 65537 + k);
    return w;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flit_t f;
    longint t0, t1;
    int cyc;
    rsp_ready = 1; req_valid = 0; req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      f = '0; f.kind = FK_HBM_WR; f.src_x = 2; f.src_y = 1; f.x_lo = 2; f.x_hi = 2;
      f.y_lo = 8; f.y_hi = 8; f.addr = addr_t'(i + 100); f.data = pat(i);
      txq.push_back(f);
    end
    while (txq.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (u_hbm.n_writes != NW) begin failures++; $display("FAIL writes %0d", u_hbm.n_writes); end

    // read back with back-pressure on the reply side
    stall_pct = 60;
    for (int i = 0; i < NW; i++) begin
      f = '0; f.kind = FK_HBM_RD; f.src_x = 2; f.src_y = 6'(i % 2 ? 5 : 0);
      f.x_lo = 2; f.x_hi = 2; f.y_lo = 8; f.y_hi = 8;
      f.addr = addr_t'(i + 100); f.data = word_t'(addr_t'(5000 + i));
      txq.push_back(f);
    end
    cyc = 0;
    while (rxq.size() < NW && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (rxq.size() != NW) begin failures++; $display("FAIL got %0d replies", rxq.size()); end
    foreach (rxq[i]) begin
      checks++;
      if (rxq[i].kind != FK_WRITE || rxq[i].addr != addr_t'(5000 + i) || rxq[i].data != pat(i) ||
          rxq[i].x_lo != 2 || rxq[i].y_lo != 6'(i % 2 ? 5 : 0) || rxq[i].y_hi != rxq[i].y_lo) begin
        failures++; $display("FAIL reply %0d addr %0d", i, rxq[i].addr);
      end
    end
    checks++;
    if (max_outst > MAXO || max_outst < 8) begin
      failures++; $display("FAIL outstanding reads %0d", max_outst);
    end

    // throughput without stalls: NW reads in about NW + LAT cycles
    stall_pct = 0;
    rxq.delete();
    repeat (5) @(negedge clk);
    for (int i = 0; i < NW; i++) begin
      f = '0; f.kind = FK_HBM_RD; f.src_x = 2; f.src_y = 3; f.x_lo = 2; f.x_hi = 2;
      f.y_lo = 8; f.y_hi = 8; f.addr = addr_t'(i + 100); f.data = word_t'(addr_t'(6000 + i));
      txq.push_back(f);
    end
    t0 = $time;
    while (rxq.size() < NW) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > NW + LAT + 12) begin
      failures++; $display("FAIL read rate: %0d words in %0d cycles", NW, (t1 - t0) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
