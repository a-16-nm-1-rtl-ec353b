// tb_mem_xbar: eight random requester ports hammer a few rows of the shared
// memory through the crossbar. Checks: read data against a reference memory,
// at most one grant per bank per cycle, every uncontended request granted at
// once (full crossbar), and no port waiting longer than the round-robin bound.
module tb_mem_xbar;
  import voltra_pkg::*;
  localparam int NP = 8;
  logic clk = 0, rst_n = 0;
  mem_req_t [NP-1:0] req;
  mem_rsp_t [NP-1:0] rsp;
  logic [BANKS-1:0] bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0] bank_wdata, bank_rdata;
  int checks = 0, failures = 0;
  word_t model [int];
  word_t exp_rd [NP];
  logic  exp_v [NP];
  int    wait_c [NP];
  int    contended = 0;
  logic  granted [NP];

  always #5 clk = ~clk;

  mem_xbar #(.NPORTS(NP), .NBANKS(BANKS)) dut (
    .clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  shared_memory u_mem (.clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  function automatic mem_req_t rnd_req();
    mem_req_t r;
    r.req   = 1'($urandom_range(0, 2) != 0);
    r.we    = 1'($urandom_range(0, 2) == 0);
    r.addr  = {9'($urandom_range(0, 1)), 5'($urandom_range(0, 7)), 3'b0};
    r.wdata = {$urandom, $urandom};
    return r;
  endfunction

  initial begin
    req = '0;
    for (int p = 0; p < NP; p++) begin exp_v[p] = 0; wait_c[p] = 0; granted[p] = 0; end
    // initialise the rows used
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 2*BANKS*8; w++) begin
      int row, bank;
      row = w / BANKS; bank = w % BANKS;
      if (row >= 2) break;
      @(negedge clk);
      req[0] = '{req: 1'b1, we: 1'b1, addr: addr_t'(w*8), wdata: word_t'(w)};
      model[w*8] = word_t'(w);
    end
    @(negedge clk); req = '0;
    for (int t = 0; t < 4000; t++) begin
      int gcount [BANKS];
      @(negedge clk);
      // check read data returned for last cycle's grants
      for (int p = 0; p < NP; p++) begin
        if (exp_v[p]) begin
          checks++;
          if (!rsp[p].rvalid || rsp[p].rdata !== exp_rd[p]) begin
            failures++;
            if (failures < 5) $display("t=%0t port %0d rv %b rdata %h exp %h", $time, p, rsp[p].rvalid, rsp[p].rdata, exp_rd[p]);
          end
        end else if (rsp[p].rvalid) begin
          failures++;
        end
        exp_v[p] = 0;
      end
      // granted requests retire, idle ports get new ones, held ones stay
      for (int p = 0; p < NP; p++) if (granted[p]) req[p].req = 0;
      for (int p = 0; p < NP; p++) if (!req[p].req) req[p] = rnd_req();
      #1;
      for (int b = 0; b < BANKS; b++) gcount[b] = 0;
      for (int p = 0; p < NP; p++) granted[p] = 0;
      for (int p = 0; p < NP; p++) begin
        int nb;
        nb = 0;
        for (int q = 0; q < NP; q++) if (req[q].req && req[q].addr[7:3] == req[p].addr[7:3]) nb++;
        if (req[p].req && nb == 1) begin
          checks++;
          if (!rsp[p].gnt) failures++;
        end
        if (nb > 1 && req[p].req) contended++;
        if (req[p].req && rsp[p].gnt) begin
          gcount[req[p].addr[7:3]]++;
          if (req[p].we) model[req[p].addr] = req[p].wdata;
          else begin exp_rd[p] = model[req[p].addr]; exp_v[p] = 1; end
          wait_c[p] = 0;
          granted[p] = 1;
        end else if (req[p].req) begin
          wait_c[p]++;
          checks++;
          if (wait_c[p] >= NP) failures++;
        end
      end
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (gcount[b] > 1) failures++;
      end
    end
    checks++;
    if (contended == 0) failures++;
    $display("contended requests: %0d", contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
