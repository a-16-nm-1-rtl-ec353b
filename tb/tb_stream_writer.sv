// tb_stream_writer: the Q_Out-streamer configuration (8 x 64-bit channels)
// writes random beats through the crossbar, under random input gaps and bank
// conflicts from an extra port; the memory is then read back word by word
// and compared with where the AGU pattern and channel stride should have put
// each word. Also checks one beat per cycle when nothing interferes.
module tb_stream_writer;
  import voltra_pkg::*;
  localparam int NCH = 8, NP = NCH + 2, TBP = NCH, CONT = NCH + 1;
  logic clk = 0, rst_n = 0, start = 0;
  stream_cfg_t cfg;
  mem_req_t [NP-1:0] req;
  mem_rsp_t [NP-1:0] rsp;
  logic [BANKS-1:0] bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0] bank_wdata, bank_rdata;
  logic [NCH*64-1:0] in_data;
  logic in_valid, in_ready, busy;
  logic cont_en = 0, cont_gnt_q = 0;
  int checks = 0, failures = 0;
  word_t model [addr_t];

  always #5 clk = ~clk;

  stream_writer #(.NUM_CH(NCH), .WORDS(1), .DEPTH(2), .DIMS(3)) dut (
    .clk, .rst_n, .start, .cfg, .in_data, .in_valid, .in_ready,
    .mem_req(req[NCH-1:0]), .mem_rsp(rsp[NCH-1:0]), .busy);
  mem_xbar #(.NPORTS(NP)) u_xbar (.clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  shared_memory u_mem (.clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  always_ff @(posedge clk) cont_gnt_q <= req[CONT].req && rsp[CONT].gnt;
  always_ff @(negedge clk) begin
    if (!req[CONT].req || cont_gnt_q) begin
      req[CONT].req   <= cont_en && ($urandom_range(0, 1) == 1);
      req[CONT].we    <= 1'b0;
      req[CONT].addr  <= addr_t'($urandom_range(0, 255) * 8);
      req[CONT].wdata <= '0;
    end
  end

  task automatic read_word(addr_t a, output word_t d);
    @(negedge clk);
    req[TBP] = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    req[TBP] = '0;
    #1 d = rsp[TBP].rdata;
  endtask

  task automatic run(int gaps, output int beats, output int cycles);
    int n;
    addr_t addrs[$];
    for (int i2 = 0; i2 < cfg.agu.bound[2]; i2++)
      for (int i1 = 0; i1 < cfg.agu.bound[1]; i1++)
        for (int i0 = 0; i0 < cfg.agu.bound[0]; i0++)
          addrs.push_back(cfg.agu.base + addr_t'(i0) * cfg.agu.stride[0] + addr_t'(i1) * cfg.agu.stride[1]
                          + addr_t'(i2) * cfg.agu.stride[2]);
    n = addrs.size();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    beats = 0; cycles = 1;
    in_valid = 0;
    while (beats < n && cycles < 20000) begin
      if (!in_valid) begin
        for (int i = 0; i < NCH*2; i++) in_data[i*32 +: 32] = $urandom;
        in_valid = (gaps == 0) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      end
      #1;
      if (in_valid && in_ready) begin
        for (int c = 0; c < NCH; c++) model[addrs[beats] + addr_t'(c) * cfg.ch_stride] = in_data[c*64 +: 64];
        beats++;
        @(negedge clk);
        in_valid = 0;
      end else begin
        @(negedge clk);
      end
      cycles++;
    end
    in_valid = 0;
    checks++;
    if (beats != n) begin failures++; $display("wrote %0d of %0d beats", beats, n); end
    for (int i = 0; i < 5000 && busy; i++) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy: agu %b fifos %b", dut.a_busy, dut.f_valid); end
  endtask

  initial begin
    int beats, cycles;
    word_t d;
    req = '0; in_valid = 0; in_data = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // contiguous tiles, no interference
    cfg = '0;
    cfg.agu.base = 17'h0400;
    cfg.agu.bound = '{1, 1, 1, 1, 2, 4};
    cfg.agu.stride[0] = 17'd64; cfg.agu.stride[1] = 17'd512;
    cfg.ch_stride = 17'd8;
    run(0, beats, cycles);
    $display("uncontended: %0d beats in %0d cycles", beats, cycles);
    checks++;
    if (cycles > beats + 3) failures++;

    // rows of 8 bytes scattered with a row pitch (row-major output matrix)
    cont_en = 1;
    cfg = '0;
    cfg.agu.base = 17'h4000;
    cfg.agu.bound = '{1, 1, 1, 2, 2, 8};
    cfg.agu.stride[0] = 17'd8; cfg.agu.stride[1] = 17'd2048; cfg.agu.stride[2] = 17'd4096;
    cfg.ch_stride = 17'd256;
    run(1, beats, cycles);
    cont_en = 0;
    repeat (4) @(negedge clk);

    foreach (model[a]) begin
      read_word(a, d);
      checks++;
      if (d !== model[a]) begin
        failures++;
        if (failures < 6) $display("addr %h got %h exp %h", a, d, model[a]);
      end
    end
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
