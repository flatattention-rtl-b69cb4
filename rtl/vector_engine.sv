// vector_engine: the tile's vector unit for the Softmax steps of FlatAttention
// (row max, exp(S - m), row sum, rescaling of O and of the running statistics).
//
// The evaluated tile has four vector engines of 32 FLOP/cycle each, i.e. 64
// FP16 multiply-add lanes. Here the four engines are folded into one 64-lane
// datapath that processes one 1024-bit L1 word per cycle. Because score and output
// blocks are stored column by column (word n = column n, lane m = row m; see
// matrix_engine), every row statistic is a lane-wise operation across words.
//
// Command (ve_cmd_t): op, src, opnd, dst, n. Element ops read the operand word t
// once, then stream d[i] = f(s[i], t) for i < n (MAX, ADD, MUL, DIV, SUBEXP =
// exp(s - t)); reductions RMAX / RSUM fold n words into one word written at dst.
// Lanes are Q8.8 with saturation. Ports: one L1 read port, one L1 write port.
// Timing: after the operand read, one word per cycle when the L1 banks are free,
// so an n-word element op takes about n + 5 cycles. cmd_ready is high when idle.
module vector_engine
  import flat_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  ve_cmd_t cmd,
  output logic    busy,
  output l1_req_t rd_req,
  input  l1_rsp_t rd_rsp,
  output l1_req_t wr_req,
  input  l1_rsp_t wr_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_TREQ, S_TWAIT, S_STREAM, S_FINAL} state_e;
  state_e  state_q;
  ve_cmd_t c_q;
  word_t   t_q, acc_q;
  len_t    cnt_q;           // words written (element ops) or folded (reductions)

  logic    is_red;
  logic    sr_start, sr_done, s_valid, s_ready;
  word_t   s_data;
  l1_req_t sr_req;
  l1_rsp_t sr_rsp;
  lane_t   ex_in [LANES], ex_out [LANES];
  word_t   res, red_next;
  addr_t   sr_base;
  len_t    sr_count;

  assign sr_base  = (state_q == S_IDLE) ? cmd.src : c_q.src;
  assign sr_count = (state_q == S_IDLE) ? cmd.n   : c_q.n;

  assign is_red    = (c_q.op == VOP_RMAX) || (c_q.op == VOP_RSUM);
  assign cmd_ready = (state_q == S_IDLE);
  assign busy      = (state_q != S_IDLE);

  l1_stream_reader #(.DEPTH(4)) u_rd (
    .clk_i, .rst_ni, .start (sr_start), .base (sr_base), .count (sr_count), .done (sr_done),
    .l1_req (sr_req), .l1_rsp (sr_rsp),
    .out_valid (s_valid), .out_ready (s_ready), .out_data (s_data)
  );

  // operand read shares the read port before the stream starts; its data must
  // not enter the stream buffer
  always_comb begin
    sr_rsp = rd_rsp;
    if (state_q == S_TWAIT) sr_rsp.rvalid = 1'b0;
    rd_req = sr_req;
    if (state_q == S_TREQ) begin
      rd_req      = '0;
      rd_req.req  = 1'b1;
      rd_req.addr = c_q.opnd;
    end
  end

  // ---------------------------------------------------------------- datapath
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    lane_t s, t, a;
    logic signed [47:0] prod, quot;
    assign s = lane_t'(s_data[i*LANE_W +: LANE_W]);
    assign t = lane_t'(t_q[i*LANE_W +: LANE_W]);
    assign a = lane_t'(acc_q[i*LANE_W +: LANE_W]);
    assign ex_in[i] = sat16(48'(s) - 48'(t));
    assign prod = (48'(s) * 48'(t)) >>> FRAC;
    assign quot = (t == 0) ? ((s < 0) ? -48'sd32768 : 48'sd32767)
                           : ((48'(s) <<< FRAC) / 48'(t));
    always_comb begin
      unique case (c_q.op)
        VOP_MAX:    res[i*LANE_W +: LANE_W] = (s > t) ? s : t;
        VOP_ADD:    res[i*LANE_W +: LANE_W] = sat16(48'(s) + 48'(t));
        VOP_MUL:    res[i*LANE_W +: LANE_W] = sat16(prod);
        VOP_DIV:    res[i*LANE_W +: LANE_W] = sat16(quot);
        VOP_SUBEXP: res[i*LANE_W +: LANE_W] = ex_out[i];
        default:    res[i*LANE_W +: LANE_W] = s;
      endcase
      if (c_q.op == VOP_RMAX) red_next[i*LANE_W +: LANE_W] = (s > a) ? s : a;
      else                    red_next[i*LANE_W +: LANE_W] = sat16(48'(s) + 48'(a));
    end
  end

  exp_unit #(.N(LANES)) u_exp (.x (ex_in), .y (ex_out));

  // ---------------------------------------------------------------- control
  always_comb begin
    s_ready = 1'b0;
    wr_req  = '0;
    if (state_q == S_STREAM) begin
      if (is_red) begin
        s_ready = 1'b1;
      end else begin
        wr_req.req   = s_valid;
        wr_req.we    = 1'b1;
        wr_req.addr  = c_q.dst + addr_t'(cnt_q);
        wr_req.wdata = res;
        s_ready      = wr_rsp.gnt;
      end
    end else if (state_q == S_FINAL) begin
      wr_req.req   = 1'b1;
      wr_req.we    = 1'b1;
      wr_req.addr  = c_q.dst;
      wr_req.wdata = acc_q;
    end
  end

  assign sr_start = ((state_q == S_TWAIT) && rd_rsp.rvalid) ||
                    ((state_q == S_IDLE) && cmd_valid &&
                     ((cmd.op == VOP_RMAX) || (cmd.op == VOP_RSUM)));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      c_q     <= '0;
      t_q     <= '0;
      acc_q   <= '0;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          c_q   <= cmd;
          cnt_q <= '0;
          for (int i = 0; i < LANES; i++)
            acc_q[i*LANE_W +: LANE_W] <= (cmd.op == VOP_RMAX) ? 16'h8000 : 16'h0000;
          if (cmd.n == '0)                                     state_q <= S_IDLE;
          else if ((cmd.op == VOP_RMAX) || (cmd.op == VOP_RSUM)) state_q <= S_STREAM;
          else                                                  state_q <= S_TREQ;
        end
        S_TREQ:  if (rd_rsp.gnt) state_q <= S_TWAIT;
        S_TWAIT: if (rd_rsp.rvalid) begin
          t_q     <= rd_rsp.rdata;
          state_q <= S_STREAM;
        end
        S_STREAM: if (s_valid && s_ready) begin
          cnt_q <= cnt_q + 1'b1;
          if (is_red) acc_q <= red_next;
          if (cnt_q + 1'b1 == c_q.n) state_q <= is_red ? S_FINAL : S_IDLE;
        end
        S_FINAL: if (wr_rsp.gnt) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_stream_done: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_IDLE) |-> !s_valid);
endmodule
