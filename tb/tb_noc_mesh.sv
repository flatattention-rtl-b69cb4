// tb_noc_mesh: a 4x4 mesh with traffic from every tile. It checks that random
// unicasts each arrive once, intact, at the right tile; that row, column and
// full-group multicasts reach every tile of their rectangle exactly once; that
// row sum and max reductions deliver, to the root tile only, one combined word
// per contributed word; that requests for row 4 (the HBM row) leave through the
// south edge of their column; and that an idle-network unicast over 6 hops
// arrives in at most 6 + 3 cycles.
module tb_noc_mesh;
  import flat_pkg::*;
  localparam int X = 4, Y = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  logic  tiv [Y][X], tir [Y][X], tov [Y][X], tor [Y][X];
  flit_t ti  [Y][X], to  [Y][X];
  logic  sov [X], sor [X], siv [X], sir [X];
  flit_t so  [X], si  [X];
  flit_t txq [Y][X][$];
  flit_t rxq [Y][X][$];
  flit_t sq  [X][$];
  logic  rdy_prev [Y][X];
  longint cyc = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  noc_mesh #(.MESH_X(X), .MESH_Y(Y)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .tile_in_valid(tiv), .tile_in_ready(tir), .tile_in(ti),
    .tile_out_valid(tov), .tile_out_ready(tor), .tile_out(to),
    .south_out_valid(sov), .south_out_ready(sor), .south_out(so),
    .south_in_valid(siv), .south_in_ready(sir), .south_in(si));

  // drivers and monitors, all at the falling edge
  always @(negedge clk) begin
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++) begin
      if (tiv[y][x] && rdy_prev[y][x]) void'(txq[y][x].pop_front());
      tiv[y][x] = (txq[y][x].size() != 0) && rst_n;
      ti[y][x]  = (txq[y][x].size() != 0) ? txq[y][x][0] : '0;
      rdy_prev[y][x] = tir[y][x];
      if (tov[y][x]) rxq[y][x].push_back(to[y][x]);
    end
    for (int x = 0; x < X; x++) if (sov[x]) sq[x].push_back(so[x]);
  end

  function automatic flit_t mk(flit_kind_e k, int sx, int sy, int xl, int xh, int yl, int yh,
                               int root, int addr, int d);
    flit_t f;
    f = '0;
    f.kind = k; f.src_x = 6'(sx); f.src_y = 6'(sy);
    f.x_lo = 6'(xl); f.x_hi = 6'(xh); f.y_lo = 6'(yl); f.y_hi = 6'(yh);
    f.root_x = 6'(root); f.addr = addr_t'(addr);
    for (int i = 0; i < LANES; i++) f.data[i*16 +: 16] = 16'(d + i);
    return f;
  endfunction

  task automatic drain(int n);
    repeat (n) @(negedge clk);
  endtask
  task automatic clear_rx();
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++) rxq[y][x].delete();
    for (int x = 0; x < X; x++) sq[x].delete();
  endtask
  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++) begin
      tiv[y][x] = 0; ti[y][x] = '0; tor[y][x] = 1; rdy_prev[y][x] = 0;
    end
    for (int x = 0; x < X; x++) begin sor[x] = 1; siv[x] = 0; si[x] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- random unicasts
    begin
      int dst_of [int];
      int n;
      n = 0;
      for (int i = 0; i < 400; i++) begin
        int sx, sy, dx, dy;
        sx = $urandom % X; sy = $urandom % Y; dx = $urandom % X; dy = $urandom % Y;
        txq[sy][sx].push_back(mk(FK_WRITE, sx, sy, dx, dx, dy, dy, 0, i, i * 3));
        dst_of[i] = dy * X + dx;
      end
      drain(600);
      for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++)
        foreach (rxq[y][x][k]) begin
          int a;
          a = int'(rxq[y][x][k].addr);
          chk("unicast destination", dst_of.exists(a) && dst_of[a] == y * X + x);
          chk("unicast data", rxq[y][x][k].data[15:0] == 16'(a * 3));
          n++;
        end
      chk($sformatf("unicast count %0d", n), n == 400);
      clear_rx();
    end

    // ---- row multicast from (2,2) over row 2
    txq[2][2].push_back(mk(FK_WRITE, 2, 2, 0, 3, 2, 2, 0, 1000, 7));
    drain(20);
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++)
      chk($sformatf("row mcast (%0d,%0d)", x, y), rxq[y][x].size() == ((y == 2) ? 1 : 0));
    clear_rx();

    // ---- column multicast from (1,1) over column 1
    txq[1][1].push_back(mk(FK_WRITE, 1, 1, 1, 1, 0, 3, 0, 1001, 7));
    drain(20);
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++)
      chk($sformatf("col mcast (%0d,%0d)", x, y), rxq[y][x].size() == ((x == 1) ? 1 : 0));
    clear_rx();

    // ---- whole-group multicast from (3,0), 8 words
    for (int i = 0; i < 8; i++) txq[0][3].push_back(mk(FK_WRITE, 3, 0, 0, 3, 0, 3, 0, 1100 + i, i));
    drain(40);
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++) begin
      chk($sformatf("group mcast (%0d,%0d)", x, y), rxq[y][x].size() == 8);
      if (rxq[y][x].size() == 8) chk("group mcast order", rxq[y][x][7].addr == 1107);
    end
    clear_rx();

    // ---- row sum reduction in row 1 to root column 1, 8 words
    for (int x = 0; x < X; x++)
      for (int i = 0; i < 8; i++)
        txq[1][x].push_back(mk(FK_RED_SUM, x, 1, 0, 3, 1, 1, 1, 1200 + i, (x + 1) * 10 + i));
    // and a max reduction in row 3 to root column 3
    for (int x = 0; x < X; x++)
      txq[3][x].push_back(mk(FK_RED_MAX, x, 3, 0, 3, 3, 3, 3, 1300, (x == 2) ? 900 : x));
    drain(40);
    for (int y = 0; y < Y; y++) for (int x = 0; x < X; x++) begin
      int n;
      n = (y == 1 && x == 1) ? 8 : ((y == 3 && x == 3) ? 1 : 0);
      chk($sformatf("reduce delivery (%0d,%0d) got %0d", x, y, rxq[y][x].size()), rxq[y][x].size() == n);
    end
    if (rxq[1][1].size() == 8)
      for (int i = 0; i < 8; i++)
        for (int l = 0; l < LANES; l++)
          chk("reduce sum", lane_t'(rxq[1][1][i].data[l*16 +: 16]) == lane_t'(100 + 4 * (i + l)));
    if (rxq[3][3].size() == 1)
      chk("reduce max", lane_t'(rxq[3][3][0].data[15:0]) == 16'sd900);
    clear_rx();

    // ---- requests to the HBM row leave on the south edge of their column
    for (int x = 0; x < X; x++) txq[x][x].push_back(mk(FK_HBM_RD, x, x, x, x, Y, Y, 0, 1400 + x, 0));
    drain(20);
    for (int x = 0; x < X; x++)
      chk($sformatf("south exit col %0d", x), sq[x].size() == 1 && sq[x][0].addr == addr_t'(1400 + x));
    clear_rx();

    // ---- latency of a 6-hop unicast in an idle network
    begin
      longint t0;
      txq[0][0].push_back(mk(FK_WRITE, 0, 0, 3, 3, 3, 3, 0, 1500, 0));
      t0 = cyc;
      while (rxq[3][3].size() == 0 && cyc < t0 + 50) @(negedge clk);
      chk($sformatf("6-hop latency %0d cycles", cyc - t0), cyc - t0 <= 9);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
