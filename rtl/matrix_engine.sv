// matrix_engine: the tile's GEMM engine, an output-stationary array of
// M x N = 32 x 16 multiply-accumulate cells (the RedMulE configuration of the
// evaluated tile: 512 cells, 1024 FLOP per cycle).
//
// It computes C = A*B or C += A*B for an M x K block A, a K x N block B and an
// M x N block C held in L1. Operands stream in one k per cycle: word a+k holds
// column k of A (lane m = A[m][k]) and word b+k holds row k of B (lane n = B[k][n]);
// every cycle all 512 cells do acc[m][n] += A[m][k]*B[k][n]. C is stored column by
// column, word c+n holding C[:,n] in lanes 0..M-1, the layout the vector engine
// uses for row statistics and the one needed to feed P back in as an A operand.
// With acc=1 the old C is first read into the accumulators (scaled up by `shift`).
// Results are written back as acc >>> shift, saturated to 16 bits (shift = 8 for
// Q8.8 operands). Accumulators are 40 bits wide.
//
// Ports: command valid/ready, three L1 ports (A, B, C). Timing: K cycles of
// streaming plus N write cycles (and N read cycles with acc=1) plus a few cycles
// of pipeline, with no bank conflicts. The array organisation (outer product,
// output-stationary) is this design's choice; the paper gives only the cell count
// and throughput.
module matrix_engine
  import flat_pkg::*;
#(
  parameter int unsigned M = 32,
  parameter int unsigned N = 16
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  me_cmd_t cmd,
  output logic    busy,
  output l1_req_t a_req,
  input  l1_rsp_t a_rsp,
  output l1_req_t b_req,
  input  l1_rsp_t b_rsp,
  output l1_req_t c_req,
  input  l1_rsp_t c_rsp
);
  localparam int unsigned AW = 40;
  typedef enum logic [1:0] {S_IDLE, S_CLOAD, S_STREAM, S_CWRITE} state_e;

  state_e  state_q;
  me_cmd_t c_q;
  len_t    cnt_q;
  logic signed [AW-1:0] acc_q [M][N];

  logic  start, a_valid, b_valid, c_valid, ab_fire, a_done, b_done, c_done;
  word_t a_data, b_data, c_data;
  l1_req_t cl_req;
  word_t   c_out;

  assign start     = (state_q == S_IDLE) && cmd_valid;
  assign cmd_ready = (state_q == S_IDLE);
  assign busy      = (state_q != S_IDLE);
  assign ab_fire   = (state_q == S_STREAM) && a_valid && b_valid;

  l1_stream_reader #(.DEPTH(4)) u_a (
    .clk_i, .rst_ni, .start, .base (cmd.a), .count (cmd.k), .done (a_done),
    .l1_req (a_req), .l1_rsp (a_rsp),
    .out_valid (a_valid), .out_ready (ab_fire), .out_data (a_data));
  l1_stream_reader #(.DEPTH(4)) u_b (
    .clk_i, .rst_ni, .start, .base (cmd.b), .count (cmd.k), .done (b_done),
    .l1_req (b_req), .l1_rsp (b_rsp),
    .out_valid (b_valid), .out_ready (ab_fire), .out_data (b_data));
  l1_stream_reader #(.DEPTH(4)) u_c (
    .clk_i, .rst_ni, .start (start && cmd.acc), .base (cmd.c), .count (len_t'(N)),
    .done (c_done), .l1_req (cl_req), .l1_rsp (c_rsp),
    .out_valid (c_valid), .out_ready (state_q == S_CLOAD), .out_data (c_data));

  // write-back word for column cnt_q
  always_comb begin
    c_out = '0;
    for (int m = 0; m < M; m++)
      c_out[m*LANE_W +: LANE_W] = sat16(48'(acc_q[m][cnt_q[$clog2(N)-1:0]] >>> c_q.shift));
  end

  always_comb begin
    c_req = cl_req;
    if (state_q == S_CWRITE) begin
      c_req.req   = 1'b1;
      c_req.we    = 1'b1;
      c_req.addr  = c_q.c + addr_t'(cnt_q);
      c_req.wdata = c_out;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      c_q     <= '0;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          c_q     <= cmd;
          cnt_q   <= '0;
          state_q <= cmd.acc ? S_CLOAD : ((cmd.k == '0) ? S_CWRITE : S_STREAM);
        end
        S_CLOAD: if (c_valid) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == len_t'(N - 1)) begin
            cnt_q   <= '0;
            state_q <= (c_q.k == '0) ? S_CWRITE : S_STREAM;
          end
        end
        S_STREAM: if (ab_fire) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q + 1'b1 == c_q.k) begin
            cnt_q   <= '0;
            state_q <= S_CWRITE;
          end
        end
        S_CWRITE: if (c_rsp.gnt) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == len_t'(N - 1)) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // the 32 x 16 multiply-accumulate array
  always_ff @(posedge clk_i) begin
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++) begin
        if (start && !cmd.acc)
          acc_q[m][n] <= '0;
        else if ((state_q == S_CLOAD) && c_valid && (cnt_q[$clog2(N)-1:0] == n[$clog2(N)-1:0]))
          acc_q[m][n] <= AW'(lane_t'(c_data[m*LANE_W +: LANE_W])) <<< c_q.shift;
        else if (ab_fire)
          acc_q[m][n] <= acc_q[m][n] +
                         AW'(lane_t'(a_data[m*LANE_W +: LANE_W])) * AW'(lane_t'(b_data[n*LANE_W +: LANE_W]));
      end
    end
  end

  a_readers_idle: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_CWRITE) |-> (a_done && b_done && c_done));
endmodule
