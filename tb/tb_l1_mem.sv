// tb_l1_mem: writes a pattern into every bank, including the last row, reads it
// back with the one-cycle read latency and checks that banks are independent
// (four accesses in one cycle).
module tb_l1_mem;
  import flat_pkg::*;
  localparam int NB = 4, ROWS = 768, RW = $clog2(ROWS);
  logic clk = 0;
  logic [NB-1:0] bank_req, bank_we;
  logic [RW-1:0] bank_row [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  l1_mem #(.NBANKS(NB), .BANK_ROWS(ROWS)) dut (.clk_i(clk), .bank_req, .bank_we, .bank_row,
                                               .bank_wdata, .bank_rdata);

  function automatic word_t pat(int b, int r);
    word_t w;
    for (int i = 0; i < 32; i++) w[i*32 +: 32] = 32'(b * 100003 + r * 7919 + i * 13 + 1);
    return w;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_req = '0; bank_we = '0;
    for (int b = 0; b < NB; b++) begin bank_row[b] = '0; bank_wdata[b] = '0; end
    @(negedge clk);
    // write all rows of all banks, four banks per cycle
    for (int r = 0; r < ROWS; r++) begin
      for (int b = 0; b < NB; b++) begin
        bank_row[b] = RW'(r); bank_wdata[b] = pat(b, r);
      end
      bank_req = '1; bank_we = '1;
      @(negedge clk);
    end
    bank_req = '0; bank_we = '0;
    // read back, four banks per cycle, data one cycle later
    for (int r = 0; r < ROWS; r += 37) begin
      for (int b = 0; b < NB; b++) bank_row[b] = RW'((r + b * 5) % ROWS);
      bank_req = '1; bank_we = '0;
      @(negedge clk);
      bank_req = '0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (bank_rdata[b] !== pat(b, (r + b * 5) % ROWS)) begin
          failures++; $display("FAIL bank %0d row %0d", b, (r + b * 5) % ROWS);
        end
      end
    end
    // last row
    for (int b = 0; b < NB; b++) bank_row[b] = RW'(ROWS - 1);
    bank_req = '1; @(negedge clk); bank_req = '0;
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (bank_rdata[b] !== pat(b, ROWS - 1)) begin failures++; $display("FAIL last row bank %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
