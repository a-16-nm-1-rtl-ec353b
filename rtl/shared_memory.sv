// shared_memory: the unified on-chip data memory, 32 banks of 64-bit words.
//
// Every bank is an independent single-port memory (one read or one write per
// cycle) written as an array. A read issued in cycle t returns its word on
// bank_rdata in cycle t+1; a write updates the word at the end of cycle t.
// Bank count, bank width and the 128 KB capacity follow the paper; the
// single-cycle registered read is this design's stand-in for the SRAM macros.
module shared_memory
  import voltra_pkg::*;
#(
  parameter int unsigned NBANKS = BANKS,
  parameter int unsigned DEPTH  = BANK_WORDS
) (
  input  logic                           clk,
  input  logic [NBANKS-1:0]              bank_req,
  input  logic [NBANKS-1:0]              bank_we,
  input  logic [NBANKS-1:0][$clog2(DEPTH)-1:0] bank_row,
  input  word_t [NBANKS-1:0]             bank_wdata,
  output word_t [NBANKS-1:0]             bank_rdata
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    word_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (bank_req[b]) begin
        if (bank_we[b]) mem[bank_row[b]] <= bank_wdata[b];
        else            bank_rdata[b]    <= mem[bank_row[b]];
      end
    end
  end
endmodule
