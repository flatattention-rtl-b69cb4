// tb_l1_xbar: the local interconnect with an L1 behind it, against a reference
// memory model. Seven ports issue random reads and writes to 64 words; each cycle
// the test checks that every bank grants exactly the lowest-numbered port that
// asks for it, that ports on distinct banks are served together, and that read
// data comes back one cycle after the grant, to the right port, with the value
// the reference memory holds.
module tb_l1_xbar;
  import flat_pkg::*;
  localparam int NP = 7, NB = 4, ROWS = 32, RW = $clog2(ROWS), NW = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // falling edge so the asynchronous reset really fires
  l1_req_t req [NP];
  l1_rsp_t rsp [NP];
  logic [NB-1:0] bank_req, bank_we;
  logic [RW-1:0] bank_row [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  word_t model [NW];
  word_t exp_data [NP];
  logic  exp_valid [NP];
  int checks = 0, failures = 0, parallel = 0, conflicts = 0;
  always #5 clk = ~clk;

  l1_xbar #(.NPORTS(NP), .NBANKS(NB), .BANK_ROWS(ROWS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  l1_mem #(.NBANKS(NB), .BANK_ROWS(ROWS)) u_mem (.clk_i(clk), .bank_req, .bank_we, .bank_row,
                                                 .bank_wdata, .bank_rdata);

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin req[p] = '0; exp_valid[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise the 64 words through port 0
    for (int a = 0; a < NW; a++) begin
      req[0] = '{req: 1'b1, we: 1'b1, addr: addr_t'(a), wdata: rnd_word()};
      model[a] = req[0].wdata;
      @(negedge clk);
    end
    req[0] = '0;
    @(negedge clk);
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int lowest [NB];
      int nbank_busy;
      for (int b = 0; b < NB; b++) lowest[b] = -1;
      for (int p = 0; p < NP; p++) begin
        req[p].req   = ($urandom % 3) != 0;
        req[p].we    = ($urandom % 2) == 0;
        req[p].addr  = addr_t'($urandom % NW);
        req[p].wdata = rnd_word();
        if (req[p].req && lowest[req[p].addr % NB] < 0) lowest[req[p].addr % NB] = p;
      end
      #1;
      // check responses of last cycle's reads
      for (int p = 0; p < NP; p++) begin
        if (exp_valid[p]) begin
          checks++;
          if (!rsp[p].rvalid || rsp[p].rdata !== exp_data[p]) begin
            failures++; $display("FAIL read data port %0d cycle %0d", p, cyc);
          end
        end else if (rsp[p].rvalid) begin
          checks++; failures++; $display("FAIL spurious rvalid port %0d", p);
        end
      end
      // check grants
      nbank_busy = 0;
      for (int p = 0; p < NP; p++) begin
        logic want;
        want = req[p].req && (lowest[req[p].addr % NB] == p);
        checks++;
        if (rsp[p].gnt !== want) begin
          failures++; $display("FAIL grant port %0d cycle %0d", p, cyc);
        end
        if (req[p].req && !want) conflicts++;
        if (want) nbank_busy++;
      end
      if (nbank_busy > 1) parallel++;
      // update model
      for (int p = 0; p < NP; p++) begin
        exp_valid[p] = rsp[p].gnt && !req[p].we;
        if (exp_valid[p]) exp_data[p] = model[req[p].addr];
      end
      for (int p = 0; p < NP; p++)
        if (rsp[p].gnt && req[p].we) model[req[p].addr] = req[p].wdata;
      @(negedge clk);
    end
    checks++;
    if (parallel == 0 || conflicts == 0) begin
      failures++; $display("FAIL coverage parallel=%0d conflicts=%0d", parallel, conflicts);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
