// tb_vector_engine: runs every vector operation on random Q8.8 data held in an
// L1 (through the local interconnect) and compares each lane of each result word
// with a reference computed here: MAX, ADD, MUL, DIV and the reductions exactly,
// SUBEXP against the real exp() within the exponential unit's error bound. It
// also checks the throughput of one word per cycle: a 32-word element op must
// finish within 32 + 8 cycles.
module tb_vector_engine;
  import flat_pkg::*;
  localparam int NP = 3, NB = 4, ROWS = 64, RW = $clog2(ROWS);
  localparam int SRC = 0, OPND = 100, DST = 128, NWORDS = 32;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  l1_req_t req [NP];
  l1_rsp_t rsp [NP];
  logic [NB-1:0] bank_req, bank_we;
  logic [RW-1:0] bank_row [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  logic cmd_valid, cmd_ready, busy;
  ve_cmd_t cmd;
  word_t src [NWORDS];
  word_t t;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  vector_engine dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid, .cmd_ready, .cmd, .busy,
                     .rd_req(req[1]), .rd_rsp(rsp[1]), .wr_req(req[2]), .wr_rsp(rsp[2]));
  l1_xbar #(.NPORTS(NP), .NBANKS(NB), .BANK_ROWS(ROWS)) u_x (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  l1_mem #(.NBANKS(NB), .BANK_ROWS(ROWS)) u_m (.clk_i(clk), .bank_req, .bank_we, .bank_row,
                                               .bank_wdata, .bank_rdata);

  task automatic l1_write(input int a, input word_t w);
    req[0] = '{req: 1'b1, we: 1'b1, addr: addr_t'(a), wdata: w};
    @(negedge clk);
    req[0] = '0;
  endtask
  task automatic l1_read(input int a, output word_t w);
    req[0] = '{req: 1'b1, we: 1'b0, addr: addr_t'(a), wdata: '0};
    @(negedge clk);
    req[0] = '0;
    w = rsp[0].rdata;
  endtask

  function automatic int lane(word_t w, int i);
    return int'(lane_t'(w[i*16 +: 16]));
  endfunction
  function automatic int clip(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run(input vop_e op, input int n, output int cycles);
    cmd = '{op: op, src: addr_t'(SRC), opnd: addr_t'(OPND), dst: addr_t'(DST), n: len_t'(n)};
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_lane(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    word_t w;
    for (int p = 0; p < NP; p++) req[p] = '0;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NWORDS; i++) begin
      for (int l = 0; l < LANES; l++) src[i][l*16 +: 16] = 16'(($urandom % 2048) - 1024);
      l1_write(SRC + i, src[i]);
    end
    for (int l = 0; l < LANES; l++) t[l*16 +: 16] = 16'(($urandom % 1024) + ((l % 2) ? 16 : -1024));
    l1_write(OPND, t);

    // element-wise operations
    for (int o = 0; o <= 4; o++) begin
      vop_e op;
      op = vop_e'(o);
      run(op, NWORDS, cyc);
      checks++;
      if (cyc > NWORDS + 8) begin
        failures++; $display("FAIL rate op %0d: %0d cycles for %0d words", o, cyc, NWORDS);
      end
      for (int i = 0; i < NWORDS; i++) begin
        l1_read(DST + i, w);
        for (int l = 0; l < LANES; l++) begin
          int s, tt, e;
          s = lane(src[i], l); tt = lane(t, l);
          case (op)
            VOP_MAX: check_lane("max", lane(w, l), (s > tt) ? s : tt);
            VOP_ADD: check_lane("add", lane(w, l), clip(s + tt));
            VOP_MUL: check_lane("mul", lane(w, l), clip((longint'(s) * tt) >>> 8));
            VOP_DIV: begin
              longint q;
              q = (longint'(s) * 256) / tt;     // truncates towards zero
              check_lane("div", lane(w, l), (tt == 0) ? ((s < 0) ? -32768 : 32767) : clip(q));
            end
            default: begin                       // SUBEXP
              real r, err;
              int d;
              d = clip(s - tt);
              r = $exp(real'(d) / 256.0) * 256.0;
              err = real'(lane(w, l)) - r;
              if (err < 0) err = -err;
              checks++;
              if (r < 32767.0 && err > 0.07 * r + 2.0) begin
                failures++;
                if (failures < 20) $display("FAIL subexp s-t=%0d got %0d ref %f", d, lane(w, l), r);
              end
            end
          endcase
        end
      end
    end

    // reductions
    run(VOP_RMAX, NWORDS, cyc);
    l1_read(DST, w);
    for (int l = 0; l < LANES; l++) begin
      int m;
      m = -32768;
      for (int i = 0; i < NWORDS; i++) if (lane(src[i], l) > m) m = lane(src[i], l);
      check_lane("rmax", lane(w, l), m);
    end
    run(VOP_RSUM, NWORDS, cyc);
    l1_read(DST, w);
    for (int l = 0; l < LANES; l++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < NWORDS; i++) acc = clip(acc + lane(src[i], l));
      check_lane("rsum", lane(w, l), acc);
    end
    checks++;
    if (cyc > NWORDS + 8) begin failures++; $display("FAIL rate rsum %0d", cyc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
