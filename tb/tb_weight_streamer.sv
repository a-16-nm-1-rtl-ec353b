// tb_weight_streamer: reads 512-bit super-bank beats for a 3-D pattern from a
// preloaded memory, with the transposer off and on, and under bank conflicts.
// Each beat must be the eight consecutive words at the AGU address, as an
// 8x8 byte matrix, transposed when enabled. Also checks one beat per cycle
// without conflicts.
module tb_weight_streamer;
  import voltra_pkg::*;
  localparam int NP = 10, TBP = 8, CONT = 9;
  logic clk = 0, rst_n = 0, start = 0;
  stream_cfg_t cfg;
  mem_req_t [NP-1:0] req;
  mem_rsp_t [NP-1:0] rsp;
  logic [BANKS-1:0] bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0] bank_wdata, bank_rdata;
  logic [511:0] out_data;
  logic out_valid, out_ready, busy;
  logic cont_en = 0, cont_gnt_q = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_streamer #(.DEPTH(8), .DIMS(3)) dut (
    .clk, .rst_n, .start, .cfg, .mem_req(req[7:0]), .mem_rsp(rsp[7:0]),
    .out_data, .out_valid, .out_ready, .busy);
  mem_xbar #(.NPORTS(NP)) u_xbar (.clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  shared_memory u_mem (.clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  function automatic word_t pat(addr_t a);
    return {32'(a) ^ 32'h5A5A_0000, 32'(a) * 32'h9E37_79B1};
  endfunction

  always_ff @(posedge clk) cont_gnt_q <= req[CONT].req && rsp[CONT].gnt;
  always_ff @(negedge clk) begin
    if (!req[CONT].req || cont_gnt_q) begin
      req[CONT].req   <= cont_en && ($urandom_range(0, 1) == 1);
      req[CONT].we    <= 1'b0;
      req[CONT].addr  <= addr_t'($urandom_range(0, 255) * 8);
      req[CONT].wdata <= '0;
    end
  end

  task automatic run(int rdy_mode, output int beats, output int cycles);
    int n, got;
    addr_t exp_a[$];
    for (int i2 = 0; i2 < cfg.agu.bound[2]; i2++)
      for (int i1 = 0; i1 < cfg.agu.bound[1]; i1++)
        for (int i0 = 0; i0 < cfg.agu.bound[0]; i0++)
          exp_a.push_back(cfg.agu.base + addr_t'(i0) * cfg.agu.stride[0] + addr_t'(i1) * cfg.agu.stride[1]
                          + addr_t'(i2) * cfg.agu.stride[2]);
    n = exp_a.size();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0; cycles = 1;
    while (got < n && cycles < 20000) begin
      out_ready = (rdy_mode == 0) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++) begin
            logic [7:0] e;
            int sr, sc;
            sr = cfg.transpose ? c : r;
            sc = cfg.transpose ? r : c;
            e = pat(exp_a[got] + addr_t'(8*sr))[sc*8 +: 8];
            checks++;
            if (out_data[(r*8+c)*8 +: 8] !== e) failures++;
          end
        got++;
      end
      @(negedge clk);
      cycles++;
    end
    out_ready = 0;
    beats = got;
    checks++;
    if (got != n) failures++;
  endtask

  initial begin
    int beats, cycles;
    req = '0; out_ready = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 2048; w++) begin
      @(negedge clk);
      req[TBP] = '{req: 1'b1, we: 1'b1, addr: addr_t'(w*8), wdata: pat(addr_t'(w*8))};
    end
    @(negedge clk);
    req[TBP] = '0;

    for (int r = 0; r < 6; r++) begin
      cfg = '0;
      cfg.agu.base = addr_t'($urandom_range(0, 63) * 64);
      cfg.agu.bound[0] = 16'($urandom_range(1, 4)); cfg.agu.stride[0] = 17'd64;
      cfg.agu.bound[1] = 16'($urandom_range(1, 3)); cfg.agu.stride[1] = addr_t'($urandom_range(0, 31) * 64);
      cfg.agu.bound[2] = 16'($urandom_range(1, 3)); cfg.agu.stride[2] = addr_t'($urandom_range(0, 31) * 64);
      cfg.transpose = r[0];
      cont_en = (r >= 2);
      run((r >= 2) ? 1 : 0, beats, cycles);
      if (r < 2) begin
        checks++;
        if (cycles > beats + 5) begin failures++; $display("%0d beats took %0d cycles", beats, cycles); end
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
