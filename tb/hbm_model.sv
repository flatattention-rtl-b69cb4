// hbm_model: behavioural model of one HBM channel for simulation only (the DRAM
// itself is not part of the design). It accepts one request per cycle when
// ready (ready can be made to drop at random with STALL_PCT), answers reads in
// order after a fixed latency of LAT cycles and holds WORDS words, initialised to
// zero. Reads and writes also count accesses for the testbenches.
module hbm_model
  import flat_pkg::*;
#(
  parameter int unsigned LAT       = 20,
  parameter int unsigned WORDS     = 1024,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic  req_we,
  input  addr_t req_addr,
  input  word_t req_wdata,
  output logic  rsp_valid,
  output word_t rsp_rdata
);
  word_t  mem [WORDS];
  word_t  q_data [$];
  longint q_due  [$];
  longint cyc;
  int     n_reads, n_writes;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    n_reads = 0; n_writes = 0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cyc       <= 0;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      cyc       <= cyc + 1;
      req_ready <= ($urandom % 100) >= STALL_PCT;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[req_addr % WORDS] <= req_wdata;
          n_writes++;
        end else begin
          q_data.push_back(mem[req_addr % WORDS]);
          q_due.push_back(cyc + LAT);
          n_reads++;
        end
      end
      rsp_valid <= 1'b0;
      if (q_due.size() != 0 && q_due[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q_data.pop_front();
        void'(q_due.pop_front());
      end
    end
  end
endmodule
