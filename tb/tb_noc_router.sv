// tb_noc_router: one router at (2,2) of a notional 5x5 mesh. It checks XY
// routing of unicasts to every direction, in-router duplication of a row
// multicast (one copy on each of east, west and local), the column fork of a
// multicast arriving from the west, the south-bound path of one arriving from the
// north, back-pressure on one branch of a multicast (the other branches go on,
// the stalled one gets exactly one copy later), and row reductions: the router
// holds the local contribution until both neighbour contributions are there,
// then sends their lane-wise sum (or max) to the root side.
module tb_noc_router;
  import flat_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  logic  in_valid [NPORT], in_ready [NPORT], out_valid [NPORT], out_ready [NPORT];
  flit_t in_flit [NPORT], out_flit [NPORT];
  flit_t got [NPORT][$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  noc_router dut (.clk_i(clk), .rst_ni(rst_n), .my_x(6'd2), .my_y(6'd2),
                  .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit);

  always @(posedge clk)
    for (int o = 0; o < NPORT; o++)
      if (rst_n && out_valid[o] && out_ready[o]) got[o].push_back(out_flit[o]);

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

  task automatic send(int p, flit_t f);
    @(negedge clk);
    in_flit[p] = f; in_valid[p] = 1;
    while (!in_ready[p]) @(negedge clk);   // accepted at the next rising edge
    @(negedge clk);
    in_valid[p] = 0;
  endtask

  task automatic clear();
    for (int o = 0; o < NPORT; o++) got[o].delete();
  endtask

  // expect exactly `n` flits on port o with address addr
  task automatic expect_port(string what, int o, int n, int addr);
    checks++;
    if (got[o].size() != n) begin
      failures++; $display("FAIL %s: port %0d got %0d flits, expected %0d", what, o, got[o].size(), n);
    end else if (n > 0 && got[o][0].addr != addr_t'(addr)) begin
      failures++; $display("FAIL %s: port %0d wrong addr %0d", what, o, got[o][0].addr);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORT; p++) begin in_valid[p] = 0; in_flit[p] = '0; out_ready[p] = 1; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // unicasts from the local tile
    send(P_L, mk(FK_WRITE, 2, 2, 4, 4, 2, 2, 0, 11, 0));   // east
    send(P_L, mk(FK_WRITE, 2, 2, 0, 0, 2, 2, 0, 12, 0));   // west
    send(P_L, mk(FK_WRITE, 2, 2, 2, 2, 4, 4, 0, 13, 0));   // south
    send(P_L, mk(FK_WRITE, 2, 2, 2, 2, 0, 0, 0, 14, 0));   // north
    send(P_L, mk(FK_WRITE, 2, 2, 3, 3, 0, 0, 0, 15, 0));   // X first: east
    repeat (4) @(posedge clk);
    checks++;
    if (got[P_E].size() != 2 || got[P_W].size() != 1 || got[P_S].size() != 1 ||
        got[P_N].size() != 1 || got[P_L].size() != 0) begin
      failures++; $display("FAIL unicast routing");
    end
    clear();

    // row multicast from the local tile over columns 0..4
    send(P_L, mk(FK_WRITE, 2, 2, 0, 4, 2, 2, 0, 20, 0));
    repeat (4) @(posedge clk);
    expect_port("row mcast E", P_E, 1, 20);
    expect_port("row mcast W", P_W, 1, 20);
    expect_port("row mcast L", P_L, 1, 20);
    expect_port("row mcast N", P_N, 0, 0);
    expect_port("row mcast S", P_S, 0, 0);
    clear();

    // multicast from (0,2) arriving from the west, rectangle x 0..4, y 1..3
    send(P_W, mk(FK_WRITE, 0, 2, 0, 4, 1, 3, 0, 30, 0));
    repeat (4) @(posedge clk);
    expect_port("rect mcast E", P_E, 1, 30);
    expect_port("rect mcast N", P_N, 1, 30);
    expect_port("rect mcast S", P_S, 1, 30);
    expect_port("rect mcast L", P_L, 1, 30);
    expect_port("rect mcast W", P_W, 0, 0);
    clear();

    // column multicast arriving from the north (travelling south), rows 0..4
    send(P_N, mk(FK_WRITE, 2, 0, 2, 2, 0, 4, 0, 40, 0));
    repeat (4) @(posedge clk);
    expect_port("col mcast S", P_S, 1, 40);
    expect_port("col mcast L", P_L, 1, 40);
    expect_port("col mcast N", P_N, 0, 0);
    clear();

    // back-pressure on the east branch of a row multicast
    out_ready[P_E] = 0;
    send(P_L, mk(FK_WRITE, 2, 2, 0, 4, 2, 2, 0, 50, 0));
    repeat (6) @(posedge clk);
    expect_port("stalled mcast W", P_W, 1, 50);
    expect_port("stalled mcast L", P_L, 1, 50);
    expect_port("stalled mcast E (held)", P_E, 0, 0);
    @(negedge clk) out_ready[P_E] = 1;
    repeat (4) @(posedge clk);
    expect_port("released mcast E", P_E, 1, 50);
    expect_port("no duplicate W", P_W, 1, 50);
    clear();

    // sum reduction over columns 0..4 with the root here (x = 2)
    send(P_L, mk(FK_RED_SUM, 2, 2, 0, 4, 2, 2, 2, 60, 100));
    repeat (3) @(posedge clk);
    expect_port("reduce waits", P_L, 0, 0);
    send(P_W, mk(FK_RED_SUM, 1, 2, 0, 4, 2, 2, 2, 60, 1000));
    repeat (3) @(posedge clk);
    expect_port("reduce waits east", P_L, 0, 0);
    send(P_E, mk(FK_RED_SUM, 3, 2, 0, 4, 2, 2, 2, 60, -3000));
    repeat (3) @(posedge clk);
    expect_port("reduce result", P_L, 1, 60);
    if (got[P_L].size() == 1)
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (lane_t'(got[P_L][0].data[i*16 +: 16]) != lane_t'(100 + 1000 - 3000 + 3 * i)) begin
          failures++; $display("FAIL reduce lane %0d = %0d", i, lane_t'(got[P_L][0].data[i*16 +: 16]));
        end
      end
    clear();

    // max reduction with the root at x = 4: this router only expects the west side
    send(P_W, mk(FK_RED_MAX, 1, 2, 0, 4, 2, 2, 4, 70, 500));
    send(P_L, mk(FK_RED_MAX, 2, 2, 0, 4, 2, 2, 4, 70, 200));
    repeat (3) @(posedge clk);
    expect_port("max reduce to east", P_E, 1, 70);
    if (got[P_E].size() == 1) begin
      checks++;
      if (lane_t'(got[P_E][0].data[15:0]) != 16'sd500) begin
        failures++; $display("FAIL max reduce %0d", lane_t'(got[P_E][0].data[15:0]));
      end
    end
    clear();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
