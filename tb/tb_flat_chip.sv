// tb_flat_chip: end-to-end test of the accelerator running one attention head,
// O = softmax(Q K^T) V, with the FlatAttention dataflow on a G x G group of tiles.
//
// Tile (x, y) of the group owns 32 query rows (block y) and 16 keys of each KV block
// (block x); head dimension D = 16, NKV KV blocks. The schedule follows the paper:
//   1. the diagonal tile (d, d) loads Q_d once and K_d, V_d of each KV block from
//      the HBM channel of its column (the HBM model takes a request on half of
//      the cycles, i.e. 64 B/cycle per channel, and answers after 200 cycles);
//   2. it multicasts Q_d along row d and K_d, V_d down column d (fabric multicast);
//   3. every tile computes S = Q K^T on its matrix engine (overlapping the V
//      multicast) and the row maxima of S on its vector engine; the row maxima
//      are max-reduced in the fabric onto the diagonal tile, which forms the
//      running maximum m_new = max(m_old, m) and multicasts it back along the row;
//   4. every tile computes P = exp(S - m_new) and its row sums, scales its partial
//      output and row sums by exp(m_old - m_new) (online softmax) and accumulates
//      O += P V on the matrix engine;
//   5. after the last KV block the row sums and partial outputs are sum-reduced
//      onto the diagonal tile, which divides and stores its 32 x 16 block of O
//      to HBM.
// Numbers are Q8.8. The stored result is compared with a real-valued reference
// (tolerance 0.06 absolute, set by the exp approximation and Q8.8 rounding).
// The test also counts that each mechanism really happened: HBM reads and writes,
// multicast flits (and that each was injected once, not per destination),
// reduction flits, back-pressure cycles on tile injection ports, and cycles in
// which a matrix engine and a DMA were busy at the same time. The HBM latency seen
// by the first request is checked against the model's latency.
// FULL = 1 uses the chip at its default (evaluated) size with no overrides.
module tb_flat_chip #(
  parameter bit FULL = 1'b0,
  parameter int MX   = 4,
  parameter int MY   = 4,
  parameter int G    = 4,
  parameter int NKV  = 2
);
  import flat_pkg::*;
  localparam int D = 16, KB = 16, QB = 32;
  localparam int HBM_LAT = 200;
  localparam longint WATCHDOG = 20000;
  // L1 map (word addresses) of every tile
  localparam int A_Q = 0, A_K = 16, A_V = 32, A_S = 64, A_MLOC = 80, A_M = 81;
  localparam int A_MNEW = 83, A_MG = 84, A_ALPHA = 92, A_RS = 93;   // A_MG + block index
  localparam int A_P = 96, A_LLOC = 112, A_L = 113, A_O = 128, A_ORED = 144, A_OUT = 160;
  localparam int NK = G * KB * NKV;           // keys in all
  localparam int HW = 16 + 32 * NKV;          // HBM words per channel
  // global index of key n of column block c in KV block it
  function automatic int key(int it, int c, int n);
    return it * G * KB + c * KB + n;
  endfunction
  localparam int H_OUT = 100;   // HBM word address of the output block

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  always #5 clk = ~clk;

  logic        cmd_valid, cmd_ready;
  tile_cmd_t   cmd;
  logic [2:0]  tile_busy     [MY][MX];
  logic [31:0] tile_rx_count [MY][MX];
  logic  hbm_req_valid [MX], hbm_req_ready [MX], hbm_req_we [MX];
  addr_t hbm_req_addr  [MX];
  word_t hbm_req_wdata [MX];
  logic  hbm_rsp_valid [MX];
  word_t hbm_rsp_rdata [MX];

  if (FULL) begin : g_dut
    flat_chip dut (
      .clk_i(clk), .rst_ni(rst_n), .cmd_valid, .cmd_ready, .cmd, .tile_busy, .tile_rx_count,
      .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
      .hbm_rsp_valid, .hbm_rsp_rdata);
  end else begin : g_dut
    flat_chip #(.MESH_X(MX), .MESH_Y(MY), .BANK_ROWS(64)) dut (
      .clk_i(clk), .rst_ni(rst_n), .cmd_valid, .cmd_ready, .cmd, .tile_busy, .tile_rx_count,
      .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
      .hbm_rsp_valid, .hbm_rsp_rdata);
  end

  word_t hbm_init [G][HW];
  logic  preload = 0;
  int    n_hbm_rd = 0, n_hbm_wr = 0;
  for (genvar c = 0; c < MX; c++) begin : g_hbm
    hbm_model #(.LAT(HBM_LAT), .WORDS(256), .STALL_PCT(50)) u_m (
      .clk_i(clk), .rst_ni(rst_n), .req_valid(hbm_req_valid[c]), .req_ready(hbm_req_ready[c]),
      .req_we(hbm_req_we[c]), .req_addr(hbm_req_addr[c]), .req_wdata(hbm_req_wdata[c]),
      .rsp_valid(hbm_rsp_valid[c]), .rsp_rdata(hbm_rsp_rdata[c]));
    if (c < G) begin : g_load
      always @(posedge preload) for (int i = 0; i < HW; i++) u_m.mem[i] = hbm_init[c][i];
    end
  end

  // ------------------------------------------------------------- mechanism counters
  word_t stored [G][D];  // output words written to HBM
  int  n_mcast = 0, n_red = 0, n_bp = 0, n_overlap = 0;
  longint cyc = 0, t_first_req = -1, t_first_rsp = -1;
  always @(posedge clk) begin
    logic me_any, dma_any;
    cyc++;
    me_any = 0; dma_any = 0;
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        if (g_dut.dut.t_in_valid[y][x] && g_dut.dut.t_in_ready[y][x]) begin
          if (g_dut.dut.t_in[y][x].kind == FK_WRITE &&
              (g_dut.dut.t_in[y][x].x_lo != g_dut.dut.t_in[y][x].x_hi ||
               g_dut.dut.t_in[y][x].y_lo != g_dut.dut.t_in[y][x].y_hi)) n_mcast++;
          if (g_dut.dut.t_in[y][x].kind inside {FK_RED_SUM, FK_RED_MAX}) n_red++;
        end
        if (g_dut.dut.t_in_valid[y][x] && !g_dut.dut.t_in_ready[y][x]) n_bp++;
        if (tile_busy[y][x][1]) me_any = 1;
        if (tile_busy[y][x][0]) dma_any = 1;
      end
    if (me_any && dma_any) n_overlap++;
    for (int c = 0; c < MX; c++) begin
      if (hbm_req_valid[c] && hbm_req_ready[c]) begin
        if (hbm_req_we[c]) begin
          n_hbm_wr++;
          if (c < G && hbm_req_addr[c] >= H_OUT && hbm_req_addr[c] < H_OUT + D)
            stored[c][hbm_req_addr[c] - H_OUT] = hbm_req_wdata[c];
        end else n_hbm_rd++;
        if (!hbm_req_we[c] && t_first_req < 0) t_first_req = cyc;
      end
      if (hbm_rsp_valid[c] && t_first_rsp < 0) t_first_rsp = cyc;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- command helpers
  logic took = 0;
  always @(posedge clk) took <= cmd_valid && cmd_ready;
  int exp_rx [MY][MX];

  task automatic issue(tile_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(negedge clk); while (!took);
    cmd_valid = 0;
  endtask
  function automatic tile_cmd_t rect(unit_e u, int x0, int x1, int y0, int y1);
    tile_cmd_t c;
    c = '0; c.unit = u;
    c.x_lo = coord_t'(x0); c.x_hi = coord_t'(x1); c.y_lo = coord_t'(y0); c.y_hi = coord_t'(y1);
    return c;
  endfunction
  task automatic dma(int tx0, int tx1, int ty0, int ty1, flit_kind_e k, int x0, int x1,
                     int y0, int y1, int root, int src, int dst, int len);
    tile_cmd_t c;
    c = rect(UNIT_DMA, tx0, tx1, ty0, ty1);
    c.dma.kind = k; c.dma.x_lo = coord_t'(x0); c.dma.x_hi = coord_t'(x1);
    c.dma.y_lo = coord_t'(y0); c.dma.y_hi = coord_t'(y1); c.dma.root_x = coord_t'(root);
    c.dma.src = addr_t'(src); c.dma.dst = addr_t'(dst); c.dma.len = len_t'(len);
    issue(c);
  endtask
  task automatic me(int a, int b, int c_, int k, bit acc);
    tile_cmd_t c;
    c = rect(UNIT_ME, 0, G - 1, 0, G - 1);
    c.me.a = addr_t'(a); c.me.b = addr_t'(b); c.me.c = addr_t'(c_); c.me.k = len_t'(k);
    c.me.acc = acc; c.me.shift = 4'd8;
    issue(c);
  endtask
  task automatic ve(int x0, int x1, int y0, int y1, vop_e op, int src, int opnd, int dst, int n);
    tile_cmd_t c;
    c = rect(UNIT_VE, x0, x1, y0, y1);
    c.ve.op = op; c.ve.src = addr_t'(src); c.ve.opnd = addr_t'(opnd);
    c.ve.dst = addr_t'(dst); c.ve.n = len_t'(n);
    issue(c);
  endtask
  task automatic wait_idle();
    bit any;
    do begin
      @(negedge clk);
      any = 0;
      for (int y = 0; y < G; y++) for (int x = 0; x < G; x++) if (tile_busy[y][x] != 0) any = 1;
    end while (any);
  endtask
  task automatic wait_rx(string what);
    bit ok;
    longint t0 = cyc;
    do begin
      @(negedge clk);
      ok = 1;
      for (int y = 0; y < G; y++)
        for (int x = 0; x < G; x++) if (int'(tile_rx_count[y][x]) < exp_rx[y][x]) ok = 0;
    end while (!ok && cyc - t0 < 2000);
    for (int y = 0; y < G; y++)
      for (int x = 0; x < G; x++)
        check(int'(tile_rx_count[y][x]) == exp_rx[y][x],
              $sformatf("%s: tile (%0d,%0d) received %0d words, expected %0d", what, x, y,
                        tile_rx_count[y][x], exp_rx[y][x]));
  endtask

  // ------------------------------------------------------------- data and reference
  real q [G*QB][D], k [NK][D], v [NK][D], o_ref [G*QB][D];
  function automatic logic [15:0] fx(real r);
    return 16'($rtoi(r * 256.0 + (r >= 0 ? 0.5 : -0.5)));
  endfunction

  initial begin
    longint t_load;
    int mc_expect;
    real err, max_err;
    cmd_valid = 0; cmd = '0;
    foreach (exp_rx[y, x]) exp_rx[y][x] = 0;
    // random Q, K in [-0.5, 0.5), V in [-1, 1)
    foreach (q[i, j]) q[i][j] = (real'($urandom % 256) - 128.0) / 256.0;
    foreach (k[i, j]) k[i][j] = (real'($urandom % 256) - 128.0) / 256.0;
    foreach (v[i, j]) v[i][j] = (real'($urandom % 512) - 256.0) / 256.0;
    // HBM channel c: Q_c at 0, then for each KV block j: K at 16 + 32j, V at 32 + 32j
    for (int c = 0; c < G; c++) begin
      for (int i = 0; i < HW; i++) hbm_init[c][i] = '0;
      for (int j = 0; j < D; j++)
        for (int m = 0; m < QB; m++) hbm_init[c][A_Q + j][m*16 +: 16] = fx(q[c*QB + m][j]);
      for (int it = 0; it < NKV; it++)
        for (int n = 0; n < KB; n++)
          for (int j = 0; j < D; j++) begin
            hbm_init[c][16 + 32*it + j][n*16 +: 16] = fx(k[key(it, c, n)][j]);
            hbm_init[c][32 + 32*it + n][j*16 +: 16] = fx(v[key(it, c, n)][j]);
          end
    end
    for (int i = 0; i < G*QB; i++) begin
      real s [NK];
      real mx, sum;
      mx = -1.0e9; sum = 0.0;
      for (int n = 0; n < NK; n++) begin
        s[n] = 0.0;
        for (int j = 0; j < D; j++) s[n] += $itor($rtoi(q[i][j] * 256.0)) / 256.0 *
                                           $itor($rtoi(k[n][j] * 256.0)) / 256.0;
        if (s[n] > mx) mx = s[n];
      end
      for (int n = 0; n < NK; n++) begin s[n] = $exp(s[n] - mx); sum += s[n]; end
      for (int j = 0; j < D; j++) begin
        o_ref[i][j] = 0.0;
        for (int n = 0; n < NK; n++) o_ref[i][j] += s[n] * v[n][j] / sum;
      end
    end
    #2 preload = 1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);

    for (int it = 0; it < NKV; it++) begin
      // 1. diagonal tiles load (Q and) K, V of this KV block from their column's HBM
      for (int d = 0; d < G; d++) begin
        if (it == 0) dma(d, d, d, d, FK_HBM_RD, 0, 0, 0, 0, 0, 0, 0, 48);
        else         dma(d, d, d, d, FK_HBM_RD, 0, 0, 0, 0, 0, 16 + 32*it, A_K, 32);
        exp_rx[d][d] += (it == 0) ? 48 : 32;
      end
      wait_rx("HBM load");
      if (it == 0) t_load = cyc;
      // 2. row multicast of Q (once), column multicast of K
      if (it == 0)
        for (int d = 0; d < G; d++) begin
          dma(d, d, d, d, FK_WRITE, 0, G - 1, d, d, 0, A_Q, A_Q, D);
          for (int x = 0; x < G; x++) exp_rx[d][x] += D;
        end
      for (int d = 0; d < G; d++) begin
        dma(d, d, d, d, FK_WRITE, d, d, 0, G - 1, 0, A_K, A_K, D);
        for (int y = 0; y < G; y++) exp_rx[y][d] += D;
      end
      wait_rx("Q/K multicast");
      // 3. V multicast overlapping S = Q K^T
      for (int d = 0; d < G; d++) begin
        dma(d, d, d, d, FK_WRITE, d, d, 0, G - 1, 0, A_V, A_V, KB);
        for (int y = 0; y < G; y++) exp_rx[y][d] += KB;
      end
      me(A_Q, A_K, A_S, D, 0);
      wait_idle();
      wait_rx("V multicast");
      // 4. block row maxima, max-reduced onto the diagonal tile, which forms the
      //    running maximum m_new = max(m_old, m) and multicasts it along the row
      ve(0, G - 1, 0, G - 1, VOP_RMAX, A_S, 0, A_MLOC, KB);
      wait_idle();
      for (int r = 0; r < G; r++) begin
        dma(0, G - 1, r, r, FK_RED_MAX, 0, G - 1, r, r, r, A_MLOC, A_M, 1);
        exp_rx[r][r] += 1;
      end
      wait_rx("row max reduction");
      if (it > 0) begin
        for (int d = 0; d < G; d++) ve(d, d, d, d, VOP_MAX, A_M, A_MG + it - 1, A_MNEW, 1);
        wait_idle();
      end
      for (int d = 0; d < G; d++) begin
        dma(d, d, d, d, FK_WRITE, 0, G - 1, d, d, 0, (it == 0) ? A_M : A_MNEW, A_MG + it, 1);
        for (int x = 0; x < G; x++) exp_rx[d][x] += 1;
      end
      wait_rx("row max multicast");
      // 5. P = exp(S - m_new) and its row sums; for later blocks the old partial
      //    output and row sum are first scaled by alpha = exp(m_old - m_new)
      ve(0, G - 1, 0, G - 1, VOP_SUBEXP, A_S, A_MG + it, A_P, KB);
      ve(0, G - 1, 0, G - 1, VOP_RSUM, A_P, 0, (it == 0) ? A_LLOC : A_RS, KB);
      if (it > 0) begin
        ve(0, G - 1, 0, G - 1, VOP_SUBEXP, A_MG + it - 1, A_MG + it, A_ALPHA, 1);
        ve(0, G - 1, 0, G - 1, VOP_MUL, A_O, A_ALPHA, A_O, D);
        ve(0, G - 1, 0, G - 1, VOP_MUL, A_LLOC, A_ALPHA, A_LLOC, 1);
        ve(0, G - 1, 0, G - 1, VOP_ADD, A_RS, A_LLOC, A_LLOC, 1);
      end
      wait_idle();
      // 6. O (+)= P V, accumulated in the tile
      me(A_P, A_V, A_O, KB, it > 0);
      wait_idle();
    end
    // 7. on exit: row sums and partial outputs are sum-reduced onto the diagonal tile
    for (int r = 0; r < G; r++) begin
      dma(0, G - 1, r, r, FK_RED_SUM, 0, G - 1, r, r, r, A_LLOC, A_L, 1);
      exp_rx[r][r] += 1;
    end
    wait_rx("row sum reduction");
    for (int r = 0; r < G; r++) begin
      dma(0, G - 1, r, r, FK_RED_SUM, 0, G - 1, r, r, r, A_O, A_ORED, D);
      exp_rx[r][r] += D;
    end
    wait_rx("output reduction");
    // 8. normalise on the diagonal tiles and store to HBM
    for (int d = 0; d < G; d++) ve(d, d, d, d, VOP_DIV, A_ORED, A_L, A_OUT, D);
    wait_idle();
    for (int d = 0; d < G; d++) dma(d, d, d, d, FK_HBM_WR, 0, 0, 0, 0, 0, A_OUT, H_OUT, D);
    wait_idle();
    while (n_hbm_wr < G * D) @(negedge clk);
    repeat (4) @(negedge clk);

    // ------------------------------------------------------------- results
    max_err = 0.0;
    for (int d = 0; d < G; d++) check_block(d, max_err);
    $display("max |O - O_ref| = %f", max_err);
    mc_expect = G * (D + NKV * (D + KB + 1));
    check(n_hbm_rd == G * (16 + 32 * NKV), $sformatf("HBM reads %0d", n_hbm_rd));
    check(n_hbm_wr == G * D, $sformatf("HBM writes %0d", n_hbm_wr));
    check(n_mcast == mc_expect, $sformatf("multicast flits injected %0d, expected %0d (one per word)",
                                          n_mcast, mc_expect));
    check(n_red == G * G * (NKV + 1 + D), $sformatf("reduction flits %0d", n_red));
    check(n_bp > 0, "no back-pressure seen on tile injection ports");
    check(n_overlap > 0, "matrix engine and DMA never busy at the same time");
    check(t_first_rsp - t_first_req >= HBM_LAT, $sformatf("HBM latency %0d", t_first_rsp - t_first_req));
    check(t_load - t_first_req <= HBM_LAT + 2 * 48 + 40,
          $sformatf("HBM load of 48 words took %0d cycles", t_load - t_first_req));
    $display("mechanisms: hbm_rd=%0d hbm_wr=%0d multicast_flits=%0d reduction_flits=%0d backpressure_cycles=%0d me_dma_overlap_cycles=%0d total_cycles=%0d",
             n_hbm_rd, n_hbm_wr, n_mcast, n_red, n_bp, n_overlap, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare the block stored by diagonal tile d (HBM column d) with the reference
  task automatic check_block(int d, inout real max_err);
    word_t w;
    real got, err;
    bit ok;
    ok = 1;
    for (int j = 0; j < D; j++) begin
      w = stored[d][j];
      for (int m = 0; m < QB; m++) begin
        got = $itor($signed(w[m*16 +: 16])) / 256.0;
        err = got - o_ref[d*QB + m][j];
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        if (err > 0.06) begin
          if (ok) $display("block %0d row %0d dim %0d: got %f expected %f", d, m, j, got, o_ref[d*QB+m][j]);
          ok = 0;
        end
      end
    end
    check(ok, $sformatf("output block %0d", d));
  endtask
endmodule
