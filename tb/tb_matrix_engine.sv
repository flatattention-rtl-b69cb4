// tb_matrix_engine: a 32x64 by 64x16 product on random Q8.8 data, first as
// C = A*B and then accumulated as C += A2*B2, both compared element by element
// with a reference product computed here (40-bit sum, arithmetic shift by 8,
// saturation to 16 bits). It checks the engine's rate: K operand pairs in K cycles,
// i.e. 512 multiply-accumulates per cycle, plus 16 write-back (and 16 read-back)
// cycles and at most 10 cycles of pipeline.
module tb_matrix_engine;
  import flat_pkg::*;
  localparam int NP = 4, NB = 4, ROWS = 128, RW = $clog2(ROWS);
  localparam int M = 32, N = 16, K = 64;
  localparam int A0 = 0, B0 = 64, A1 = 128, B1 = 192, C0 = 256;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  l1_req_t req [NP];
  l1_rsp_t rsp [NP];
  logic [NB-1:0] bank_req, bank_we;
  logic [RW-1:0] bank_row [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  logic cmd_valid, cmd_ready, busy;
  me_cmd_t cmd;
  int a [2][M][K], b [2][K][N];
  longint ref_c [M][N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  matrix_engine dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid, .cmd_ready, .cmd, .busy,
                     .a_req(req[1]), .a_rsp(rsp[1]), .b_req(req[2]), .b_rsp(rsp[2]),
                     .c_req(req[3]), .c_rsp(rsp[3]));
  l1_xbar #(.NPORTS(NP), .NBANKS(NB), .BANK_ROWS(ROWS)) u_x (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  l1_mem #(.NBANKS(NB), .BANK_ROWS(ROWS)) u_m (.clk_i(clk), .bank_req, .bank_we, .bank_row,
                                               .bank_wdata, .bank_rdata);

  task automatic l1_write(input int ad, input word_t w);
    req[0] = '{req: 1'b1, we: 1'b1, addr: addr_t'(ad), wdata: w};
    @(negedge clk);
    req[0] = '0;
  endtask
  task automatic l1_read(input int ad, output word_t w);
    req[0] = '{req: 1'b1, we: 1'b0, addr: addr_t'(ad), wdata: '0};
    @(negedge clk);
    req[0] = '0;
    w = rsp[0].rdata;
  endtask
  function automatic longint clip(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic run(input int ab, input bit acc, output int cycles);
    cmd = '{a: addr_t'(ab ? A1 : A0), b: addr_t'(ab ? B1 : B0), c: addr_t'(C0),
            k: len_t'(K), acc: acc, shift: 4'd8};
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_c(string what);
    word_t w;
    for (int n = 0; n < N; n++) begin
      l1_read(C0 + n, w);
      for (int m = 0; m < M; m++) begin
        checks++;
        if (longint'(lane_t'(w[m*16 +: 16])) != ref_c[m][n]) begin
          failures++;
          if (failures < 10) $display("FAIL %s C[%0d][%0d] got %0d exp %0d", what, m, n,
                                      lane_t'(w[m*16 +: 16]), ref_c[m][n]);
        end
      end
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
    for (int s = 0; s < 2; s++) begin
      for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) a[s][m][k] = int'($urandom % 512) - 256;
      for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) b[s][k][n] = int'($urandom % 512) - 256;
      for (int k = 0; k < K; k++) begin
        w = '0;
        for (int m = 0; m < M; m++) w[m*16 +: 16] = 16'(a[s][m][k]);
        l1_write((s ? A1 : A0) + k, w);
        w = '0;
        for (int n = 0; n < N; n++) w[n*16 +: 16] = 16'(b[s][k][n]);
        l1_write((s ? B1 : B0) + k, w);
      end
    end
    // C = A0 * B0
    run(0, 1'b0, cyc);
    checks++;
    if (cyc > K + N + 10) begin failures++; $display("FAIL rate %0d cycles", cyc); end
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      longint s;
      s = 0;
      for (int k = 0; k < K; k++) s += longint'(a[0][m][k]) * b[0][k][n];
      ref_c[m][n] = clip(s >>> 8);
    end
    check_c("gemm");
    // C += A1 * B1
    run(1, 1'b1, cyc);
    checks++;
    if (cyc > K + 2 * N + 12) begin failures++; $display("FAIL acc rate %0d cycles", cyc); end
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      longint s;
      s = ref_c[m][n] * 256;
      for (int k = 0; k < K; k++) s += longint'(a[1][m][k]) * b[1][k][n];
      ref_c[m][n] = clip(s >>> 8);
    end
    check_c("gemm-acc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
