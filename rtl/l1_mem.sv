// l1_mem: the tile's local L1 scratchpad, split into NBANKS single-port banks.
//
// Each bank is one word (NOC_DW = 1024 bits = 128 B) wide and answers one access
// per cycle; four banks give 512 B/cycle, the L1 bandwidth of the evaluated tile,
// and 4 x 768 words give its 384 KiB. Word address a lives in bank a % NBANKS, row
// a / NBANKS (the bank split is done by the local interconnect, l1_xbar).
// Timing: a read issued in cycle t returns bank_rdata in cycle t+1; a write is
// done at the clock edge. Contents are not reset (software-managed scratchpad).
module l1_mem
  import flat_pkg::*;
#(
  parameter int unsigned NBANKS    = 4,
  parameter int unsigned BANK_ROWS = 768
) (
  input  logic  clk_i,
  input  logic  [NBANKS-1:0] bank_req,
  input  logic  [NBANKS-1:0] bank_we,
  input  logic  [$clog2(BANK_ROWS)-1:0] bank_row [NBANKS],
  input  word_t bank_wdata [NBANKS],
  output word_t bank_rdata [NBANKS]
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    word_t mem [BANK_ROWS];
    always_ff @(posedge clk_i) begin
      if (bank_req[b]) begin
        if (bank_we[b]) mem[bank_row[b]] <= bank_wdata[b];
        else            bank_rdata[b]    <= mem[bank_row[b]];
      end
    end
  end
endmodule
