// noc_router: five-port router of the 2D-mesh NoC (north, east, south, west,
// local tile), with the fabric collectives FlatAttention relies on.
//
// Every flit is a complete transfer (header + one 1024-bit word), so routing is
// decided per flit. Each input has a DEPTH-flit FIFO; each output takes one flit per
// cycle from a round-robin choice among the inputs that want it, and hands it to
// the next router's input FIFO, so a hop costs one cycle.
//
// Multicast: a flit names a destination rectangle [x_lo..x_hi] x [y_lo..y_hi] and
// its source tile. It travels along the source row first and then along the
// columns (XY order). Where the path forks, the router copies the flit to several
// outputs (in-router flit duplication); an input remembers which of its outputs
// have already taken the head flit and frees it when all have. A 1x1 rectangle is
// an ordinary unicast. Flits that arrive from the south port (HBM replies) travel
// north in their column only.
//
// Reduction: flits of kind FK_RED_SUM / FK_RED_MAX from the tiles of columns
// [x_lo..x_hi] of one row flow towards column root_x. The router at column x
// waits until the head of its local input and the heads of the neighbour inputs
// that must contribute (west if x_lo < x <= root_x, east if root_x <= x < x_hi)
// are all reduction flits, combines them lane by lane (saturating sum or max)
// and forwards one flit towards the root, or delivers it to the root tile.
// Contributions are matched by arrival order.
//
// The paper gives what the routers do for multicast and reduction (flit-level
// replication along the path, hardware row reductions); the buffer depth, the
// single-flit transfers, the arbitration and the matching rule are this design's.
// Coordinates are inputs rather than parameters so that all routers of a mesh
// share one module.
//
// The UNOPTFLAT lint warning on out_ready when routers are joined in a mesh
// does not mark a real loop. out_ready of an output is the next router's input
// in_ready, which is the registered "FIFO not full" and never depends on
// that router's valid or grant logic. The linter treats the whole ready array
// as one signal. Because out_ready feeds this router's grants, and the same
// array's other elements are driven from neighbour FIFOs, it reports a cycle.
module noc_router
  import flat_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  coord_t my_x,
  input  coord_t my_y,
  input  logic   in_valid  [NPORT],
  output logic   in_ready  [NPORT],
  input  flit_t  in_flit   [NPORT],
  output logic   out_valid [NPORT],
  input  logic   out_ready [NPORT],
  output flit_t  out_flit  [NPORT]
);
  logic  hv [NPORT];
  flit_t h  [NPORT];
  logic  pop [NPORT];
  logic [NPORT-1:0] mask [NPORT];      // outputs wanted by input p
  logic [NPORT-1:0] sent_q [NPORT];    // outputs that already took head of p
  logic [NPORT-1:0] gnt [NPORT];       // gnt[p][o]
  logic [$clog2(NPORT)-1:0] rr_q [NPORT];
  logic [$clog2(NPORT)-1:0] win [NPORT];
  logic win_v [NPORT];

  for (genvar p = 0; p < NPORT; p++) begin : g_in
    sync_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_fifo (
      .clk_i, .rst_ni,
      .in_valid (in_valid[p]), .in_ready (in_ready[p]), .in_data (in_flit[p]),
      .out_valid (hv[p]), .out_ready (pop[p]), .out_data (h[p]), .count ());
  end

  function automatic logic is_red(flit_kind_e k);
    return (k == FK_RED_SUM) || (k == FK_RED_MAX);
  endfunction

  // ---------------------------------------------------------------- reduction
  logic  exp_w, exp_e, red_ready;
  word_t red_data;
  logic [NPORT-1:0] red_out;
  always_comb begin
    exp_w = (my_x > h[P_L].x_lo) && (my_x <= h[P_L].root_x);
    exp_e = (my_x < h[P_L].x_hi) && (my_x >= h[P_L].root_x);
    red_ready = hv[P_L] && is_red(h[P_L].kind) &&
                (!exp_w || (hv[P_W] && (h[P_W].kind == h[P_L].kind))) &&
                (!exp_e || (hv[P_E] && (h[P_E].kind == h[P_L].kind)));
    red_out = '0;
    if (my_x < h[P_L].root_x)      red_out[P_E] = 1'b1;
    else if (my_x > h[P_L].root_x) red_out[P_W] = 1'b1;
    else                           red_out[P_L] = 1'b1;
    for (int i = 0; i < LANES; i++) begin
      logic signed [47:0] s;
      lane_t m, l, w, e;
      l = lane_t'(h[P_L].data[i*LANE_W +: LANE_W]);
      w = lane_t'(h[P_W].data[i*LANE_W +: LANE_W]);
      e = lane_t'(h[P_E].data[i*LANE_W +: LANE_W]);
      s = 48'(l) + (exp_w ? 48'(w) : 48'sd0) + (exp_e ? 48'(e) : 48'sd0);
      m = l;
      if (exp_w && (w > m)) m = w;
      if (exp_e && (e > m)) m = e;
      red_data[i*LANE_W +: LANE_W] = (h[P_L].kind == FK_RED_MAX) ? m : sat16(s);
    end
  end

  // ---------------------------------------------------------------- routing
  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      flit_t f;
      logic  in_x, in_y;
      f    = h[p];
      in_x = (my_x >= f.x_lo) && (my_x <= f.x_hi);
      in_y = (my_y >= f.y_lo) && (my_y <= f.y_hi);
      mask[p] = '0;
      if (!hv[p]) begin
        mask[p] = '0;
      end else if (is_red(f.kind)) begin
        // only the local input leads a reduction; neighbour contributions are
        // consumed together with it
        if ((p == P_L) && red_ready) mask[p] = red_out;
      end else if ((p == P_L) || (p == P_E) || (p == P_W)) begin
        if ((my_x < f.x_hi) && (my_x >= f.src_x)) mask[p][P_E] = 1'b1;
        if ((my_x > f.x_lo) && (my_x <= f.src_x)) mask[p][P_W] = 1'b1;
        if (in_x) begin
          if (my_y < f.y_hi) mask[p][P_S] = 1'b1;
          if (my_y > f.y_lo) mask[p][P_N] = 1'b1;
          if (in_y)          mask[p][P_L] = 1'b1;
        end
      end else if (p == P_N) begin                  // travelling south
        if (my_y < f.y_hi)  mask[p][P_S] = 1'b1;
        if (in_x && in_y)   mask[p][P_L] = 1'b1;
      end else begin                                // from south, travelling north
        if (my_y > f.y_lo)  mask[p][P_N] = 1'b1;
        if (in_x && in_y)   mask[p][P_L] = 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- arbitration
  always_comb begin
    for (int p = 0; p < NPORT; p++) gnt[p] = '0;
    for (int o = 0; o < NPORT; o++) begin
      win_v[o] = 1'b0;
      win[o]   = '0;
      for (int k = NPORT - 1; k >= 0; k--) begin
        int unsigned p;
        p = (32'(rr_q[o]) + 32'(k)) % NPORT;
        if (mask[p][o] && !sent_q[p][o]) begin
          win_v[o] = 1'b1;
          win[o]   = 3'(p);
        end
      end
      if (win_v[o] && out_ready[o]) gnt[win[o]][o] = 1'b1;
      out_valid[o] = win_v[o];
      out_flit[o]  = h[win[o]];
      if ((win[o] == 3'(P_L)) && is_red(h[P_L].kind)) out_flit[o].data = red_data;
    end
    for (int p = 0; p < NPORT; p++)
      pop[p] = hv[p] && (mask[p] != '0) && ((sent_q[p] | gnt[p]) == mask[p]);
    // neighbour contributions leave with the local reduction flit
    if (pop[P_L] && is_red(h[P_L].kind)) begin
      if (exp_w) pop[P_W] = 1'b1;
      if (exp_e) pop[P_E] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NPORT; p++) begin
        sent_q[p] <= '0;
        rr_q[p]   <= '0;
      end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        if (pop[p]) sent_q[p] <= '0;
        else        sent_q[p] <= sent_q[p] | gnt[p];
      end
      for (int o = 0; o < NPORT; o++)
        if (win_v[o] && out_ready[o])
          rr_q[o] <= (win[o] == 3'(NPORT - 1)) ? '0 : win[o] + 1'b1;
    end
  end

  // a flit offered on an output stays offered until taken (valid/ready rule)
  for (genvar o = 0; o < NPORT; o++) begin : g_chk
    a_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (out_valid[o] && !out_ready[o]) |=> out_valid[o]);
  end
endmodule
