// tb_dma_engine: the DMA of tile (3,2) with its own L1 (crossbar and banks).
// 1. 48 FK_WRITE flits arrive from the NoC and fill L1; rx_count must count them.
// 2. A row-multicast command sends those words out; every flit must carry the
//    command's rectangle, this tile as source, address dst+i and the L1 data.
//    The NoC side stalls at random (back-pressure), and the flits are looped back
//    into the receive port at a new address while the transmitter is reading, so
//    both L1 ports compete for the banks.
// 3. HBM write and HBM read commands must target (3, HBM_ROW) and carry the L1
//    data, or the HBM address and the reply address.
// 4. Reductions carry root_x and the reduction kind.
// Rate: with no stalls a 64-word transfer must finish within 64 + 10 cycles.
module tb_dma_engine;
  import flat_pkg::*;
  localparam int HBM_ROW = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, busy;
  dma_cmd_t cmd;
  logic [31:0] rx_count;
  l1_req_t req [2];
  l1_rsp_t rsp [2];
  logic [3:0] bank_req, bank_we;
  logic [$clog2(768)-1:0] bank_row [4];
  word_t bank_wdata [4], bank_rdata [4];
  logic out_valid, out_ready, in_valid, in_ready;
  flit_t out_f, in_f;
  int checks = 0, failures = 0, stall_pct = 0, stalls = 0;
  flit_t sent [$], inq [$];
  logic loopback = 0;
  addr_t loop_off = 0;

  dma_engine #(.HBM_ROW(HBM_ROW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .my_x(6'd3), .my_y(6'd2),
    .cmd_valid, .cmd_ready, .cmd, .busy, .rx_count,
    .rd_req(req[1]), .rd_rsp(rsp[1]), .wr_req(req[0]), .wr_rsp(rsp[0]),
    .noc_out_valid(out_valid), .noc_out_ready(out_ready), .noc_out(out_f),
    .noc_in_valid(in_valid), .noc_in_ready(in_ready), .noc_in(in_f));
  l1_xbar #(.NPORTS(2)) u_xbar (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  l1_mem u_mem (.clk_i(clk), .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  function automatic word_t pat(int i);
    word_t w;
    for (int k = 0; k < 32; k++) w[k*32 +: 32] = $urandom ^ 32'(i * 7 + k);
    return w;
  endfunction

  // NoC stand-in: records what the DMA sends, stalls at random, feeds inq.
  logic in_prev = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      sent.push_back(out_f);
      if (loopback) begin
        flit_t f;
        f = out_f; f.kind = FK_WRITE; f.addr = out_f.addr + loop_off;
        inq.push_back(f);
      end
    end
    if (out_valid && !out_ready) stalls++;
  end
  always @(negedge clk) begin
    if (in_valid && in_prev) void'(inq.pop_front());
    in_valid  = inq.size() != 0;
    in_f      = in_valid ? inq[0] : '0;
    out_ready = ($urandom % 100) >= stall_pct;
  end
  always @(posedge clk) in_prev <= in_ready;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(dma_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    word_t golden [128];
    dma_cmd_t c;
    flit_t f;
    longint t0;
    cmd_valid = 0; cmd = '0; in_valid = 0; in_f = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. fill L1 through the receive path
    for (int i = 0; i < 48; i++) begin
      golden[i] = pat(i);
      f = '0; f.kind = FK_WRITE; f.addr = addr_t'(i); f.data = golden[i];
      inq.push_back(f);
    end
    while (inq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (rx_count != 48) begin failures++; $display("FAIL rx_count %0d", rx_count); end
    // 2. row multicast with back-pressure and loopback
    stall_pct = 40; loopback = 1; loop_off = 64;
    c = '0; c.kind = FK_WRITE; c.x_lo = 0; c.x_hi = 7; c.y_lo = 2; c.y_hi = 2;
    c.src = 0; c.dst = 200; c.len = 48;
    run(c);
    while (inq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    loopback = 0;
    checks++;
    if (sent.size() != 48) begin failures++; $display("FAIL sent %0d", sent.size()); end
    foreach (sent[i]) begin
      checks++;
      if (sent[i].kind != FK_WRITE || sent[i].x_lo != 0 || sent[i].x_hi != 7 ||
          sent[i].y_lo != 2 || sent[i].y_hi != 2 || sent[i].src_x != 3 || sent[i].src_y != 2 ||
          sent[i].addr != addr_t'(200 + i) || sent[i].data != golden[i]) begin
        failures++; $display("FAIL multicast flit %0d kind %0d addr %0d t=%0t", i, sent[i].kind, sent[i].addr, $time);
      end
    end
    checks++;
    if (rx_count != 96 || stalls == 0) begin
      failures++; $display("FAIL rx_count %0d stalls %0d", rx_count, stalls);
    end
    // the looped-back words now sit at 264.. (200+64); send them to HBM
    sent.delete(); stall_pct = 0;
    c = '0; c.kind = FK_HBM_WR; c.src = 264; c.dst = 1000; c.len = 48;
    run(c);
    foreach (sent[i]) begin
      checks++;
      if (sent[i].kind != FK_HBM_WR || sent[i].x_lo != 3 || sent[i].x_hi != 3 ||
          sent[i].y_lo != HBM_ROW || sent[i].y_hi != HBM_ROW ||
          sent[i].addr != addr_t'(1000 + i) || sent[i].data != golden[i]) begin
        failures++; $display("FAIL hbm write flit %0d", i);
      end
    end
    // 3. HBM read requests
    sent.delete();
    c = '0; c.kind = FK_HBM_RD; c.src = 5000; c.dst = 300; c.len = 16;
    run(c);
    checks++;
    if (sent.size() != 16) begin failures++; $display("FAIL hbm rd count %0d", sent.size()); end
    foreach (sent[i]) begin
      checks++;
      if (sent[i].kind != FK_HBM_RD || sent[i].y_lo != HBM_ROW || sent[i].x_lo != 3 ||
          sent[i].addr != addr_t'(5000 + i) || addr_t'(sent[i].data) != addr_t'(300 + i)) begin
        failures++; $display("FAIL hbm rd flit %0d", i);
      end
    end
    // 4. reduction contribution and throughput of a 64-word transfer
    sent.delete();
    c = '0; c.kind = FK_RED_MAX; c.x_lo = 0; c.x_hi = 7; c.y_lo = 2; c.y_hi = 2; c.root_x = 5;
    c.src = 0; c.dst = 400; c.len = 64;
    @(negedge clk);
    t0 = $time;
    run(c);
    checks++;
    if (($time - t0) / 10 > 64 + 10) begin
      failures++; $display("FAIL dma rate: 64 words in %0d cycles", ($time - t0) / 10);
    end
    checks++;
    if (sent.size() != 64) begin failures++; $display("FAIL red count"); end
    foreach (sent[i]) begin
      checks++;
      if (sent[i].kind != FK_RED_MAX || sent[i].root_x != 5 || sent[i].addr != addr_t'(400 + i) ||
          (i < 48 && sent[i].data != golden[i])) begin
        failures++; $display("FAIL red flit %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
