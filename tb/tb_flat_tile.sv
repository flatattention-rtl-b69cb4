// tb_flat_tile: one tile (at mesh position (2,1)) with its NoC port closed by a
// stand-in: flits addressed to the tile itself are looped back into its receive
// port after a random delay, all other flits are captured and checked.
// 1. A (32 x 16, Q8.8) and B (16 x 16) arrive as 32 FK_WRITE flits.
// 2. Three commands go to the three units back to back: the matrix engine computes
//    C = A B, the DMA copies A to another L1 area through the loopback, and the
//    vector engine takes the lane-wise maximum of the B words. The test requires a
//    cycle in which all three units are busy together (concurrent units).
// 3. The DMA sends C, the copy of A and the maximum word to tile (5,5); the
//    captured flits are compared with an integer model of the arithmetic.
// 4. A DMA command issued while the DMA is busy must be held (cmd_ready low).
module tb_flat_tile;
  import flat_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready;
  tile_cmd_t cmd;
  logic [2:0] busy;
  logic [31:0] rx_count;
  logic out_valid, out_ready, in_valid, in_ready;
  flit_t out_f, in_f;
  flit_t inq [$], outq [$];
  int checks = 0, failures = 0, all_busy = 0, held = 0;

  flat_tile #(.HBM_ROW(4), .BANK_ROWS(128)) dut (
    .clk_i(clk), .rst_ni(rst_n), .my_x(6'd2), .my_y(6'd1), .cmd_valid, .cmd_ready, .cmd,
    .busy, .rx_count, .noc_out_valid(out_valid), .noc_out_ready(out_ready), .noc_out(out_f),
    .noc_in_valid(in_valid), .noc_in_ready(in_ready), .noc_in(in_f));

  logic in_prev = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (out_f.x_lo == 2 && out_f.y_lo == 1) inq.push_back(out_f);
      else outq.push_back(out_f);
    end
    if (busy == 3'b111) all_busy++;
    if (cmd_valid && !cmd_ready) held++;
    in_prev <= in_ready;
  end
  always @(negedge clk) begin
    if (in_valid && in_prev) void'(inq.pop_front());
    in_valid  = inq.size() != 0 && ($urandom % 4 != 0);
    in_f      = inq.size() != 0 ? inq[0] : '0;
    out_ready = ($urandom % 4 != 0);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic took = 0;
  always @(posedge clk) took <= cmd_valid && cmd_ready;
  task automatic issue(tile_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(negedge clk); while (!took);
    cmd_valid = 0;
  endtask
  function automatic tile_cmd_t dmac(flit_kind_e k, int x, int y, int src, int dst, int len);
    tile_cmd_t c;
    c = '0; c.unit = UNIT_DMA;
    c.dma.kind = k; c.dma.x_lo = coord_t'(x); c.dma.x_hi = coord_t'(x);
    c.dma.y_lo = coord_t'(y); c.dma.y_hi = coord_t'(y);
    c.dma.src = addr_t'(src); c.dma.dst = addr_t'(dst); c.dma.len = len_t'(len);
    return c;
  endfunction

  logic signed [15:0] a [32][16], b [16][16];
  initial begin
    tile_cmd_t c;
    flit_t f;
    word_t wa [16], wb [16], wmax;
    cmd_valid = 0; cmd = '0;
    for (int m = 0; m < 32; m++) for (int k = 0; k < 16; k++) a[m][k] = 16'($signed($urandom % 1024) - 512);
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) b[k][n] = 16'($signed($urandom % 1024) - 512);
    for (int k = 0; k < 16; k++) begin
      wa[k] = '0; wb[k] = '0;
      for (int m = 0; m < 32; m++) wa[k][m*16 +: 16] = a[m][k];
      for (int n = 0; n < 16; n++) wb[k][n*16 +: 16] = b[k][n];
    end
    wmax = '0;
    for (int n = 0; n < 64; n++) begin
      logic signed [15:0] mx;
      mx = -16'sd32768;
      for (int k = 0; k < 16; k++) if ($signed(wb[k][n*16 +: 16]) > mx) mx = wb[k][n*16 +: 16];
      wmax[n*16 +: 16] = mx;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. operands arrive from the NoC
    for (int k = 0; k < 16; k++) begin
      f = '0; f.kind = FK_WRITE; f.x_lo = 2; f.x_hi = 2; f.y_lo = 1; f.y_hi = 1;
      f.addr = addr_t'(k); f.data = wa[k]; inq.push_back(f);
      f.addr = addr_t'(16 + k); f.data = wb[k]; inq.push_back(f);
    end
    while (rx_count != 32) @(negedge clk);
    // 2. three units at once
    c = '0; c.unit = UNIT_ME; c.me.a = 0; c.me.b = 16; c.me.c = 64; c.me.k = 16; c.me.shift = 4'd8;
    issue(c);
    issue(dmac(FK_WRITE, 2, 1, 0, 128, 16));
    c = '0; c.unit = UNIT_VE; c.ve.op = VOP_RMAX; c.ve.src = 16; c.ve.dst = 100; c.ve.n = 16;
    issue(c);
    // 4. a second DMA command must wait for the first
    issue(dmac(FK_WRITE, 5, 5, 0, 300, 1));
    while (busy != 0 || rx_count != 48) @(negedge clk);
    checks++;
    if (all_busy == 0) begin failures++; $display("FAIL the three units never ran together"); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL busy DMA did not hold a command"); end
    // 3. send results out
    issue(dmac(FK_WRITE, 5, 5, 64, 200, 16));
    issue(dmac(FK_WRITE, 5, 5, 128, 400, 16));
    issue(dmac(FK_WRITE, 5, 5, 100, 500, 1));
    while (busy != 0 || outq.size() != 34) @(negedge clk);
    checks++;
    if (outq[0].addr != 300 || outq[0].data != wa[0]) begin failures++; $display("FAIL held command"); end
    checks++;
    if (outq[33].addr != 500 || outq[33].data != wmax) begin failures++; $display("FAIL row max word"); end
    for (int n = 0; n < 16; n++) begin
      word_t w;
      w = '0;
      for (int m = 0; m < 32; m++) begin
        longint s;
        s = 0;
        for (int k = 0; k < 16; k++) s += longint'(a[m][k]) * longint'(b[k][n]);
        s = s >>> 8;
        if (s > 32767) s = 32767;
        if (s < -32768) s = -32768;
        w[m*16 +: 16] = 16'(s);
      end
      checks++;
      if (outq[1 + n].addr != addr_t'(200 + n) || outq[1 + n].data != w ||
          outq[1 + n].src_x != 2 || outq[1 + n].src_y != 1 || outq[1 + n].x_lo != 5) begin
        failures++; $display("FAIL C column %0d", n);
      end
      checks++;
      if (outq[17 + n].addr != addr_t'(400 + n) || outq[17 + n].data != wa[n]) begin
        failures++; $display("FAIL copy of A word %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
