// tb_shared_memory: writes random words to all 32 banks in parallel, reads
// them back and checks the data one cycle after each read.
module tb_shared_memory;
  import voltra_pkg::*;
  logic clk = 0;
  logic [BANKS-1:0] req, we;
  logic [BANKS-1:0][BANK_AW-1:0] row;
  word_t [BANKS-1:0] wdata, rdata;
  word_t model [BANKS][BANK_WORDS];
  logic [BANK_WORDS-1:0] written [BANKS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shared_memory dut (.clk, .bank_req(req), .bank_we(we), .bank_row(row), .bank_wdata(wdata), .bank_rdata(rdata));

  initial begin
    for (int b = 0; b < BANKS; b++) written[b] = '0;
    req = '0; we = '0; row = '0; wdata = '0;
    for (int t = 0; t < 3000; t++) begin
      logic [BANKS-1:0] rd_pend;
      logic [BANKS-1:0][BANK_AW-1:0] rd_row;
      @(negedge clk);
      for (int b = 0; b < BANKS; b++) begin
        req[b]   = 1'($urandom_range(0, 3) != 0);
        we[b]    = (t < 1000) ? 1'b1 : 1'($urandom_range(0, 3) == 0);
        row[b]   = BANK_AW'($urandom);
        wdata[b] = {$urandom, $urandom};
      end
      rd_pend = req & ~we;
      rd_row  = row;
      @(posedge clk);
      for (int b = 0; b < BANKS; b++)
        if (req[b] && we[b]) begin model[b][row[b]] = wdata[b]; written[b][row[b]] = 1'b1; end
      #1;
      for (int b = 0; b < BANKS; b++)
        if (rd_pend[b] && written[b][rd_row[b]]) begin
          checks++;
          if (rdata[b] !== model[b][rd_row[b]]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
