// tb_stream_reader: the input-streamer configuration (8 x 64-bit channels,
// 8-deep FIFOs, 6-D AGU) reading a preloaded shared memory through the
// crossbar while a extra port creates random bank conflicts. Every output
// beat is compared with the word the AGU pattern plus channel stride points
// at. Also checked: one beat per cycle without contention, and that eight
// beats are prefetched while the consumer holds off.
module tb_stream_reader;
  import voltra_pkg::*;
  localparam int NCH = 8, NP = NCH + 2, TBP = NCH, CONT = NCH + 1;
  logic clk = 0, rst_n = 0, start = 0;
  stream_cfg_t cfg;
  mem_req_t [NP-1:0] req;
  mem_rsp_t [NP-1:0] rsp;
  logic [BANKS-1:0] bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0] bank_wdata, bank_rdata;
  logic [NCH*64-1:0] out_data;
  logic out_valid, out_ready, busy;
  logic cont_en = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  stream_reader #(.NUM_CH(NCH), .WORDS(1), .DEPTH(8), .DIMS(6)) dut (
    .clk, .rst_n, .start, .cfg, .mem_req(req[NCH-1:0]), .mem_rsp(rsp[NCH-1:0]),
    .out_data, .out_valid, .out_ready, .busy);
  mem_xbar #(.NPORTS(NP)) u_xbar (.clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  shared_memory u_mem (.clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  function automatic word_t pat(addr_t a);
    return {32'(a) ^ 32'hA5A5_0000, 32'(a) * 32'h9E37_79B1};
  endfunction

  // contention port: random reads to random banks
  logic cont_gnt_q = 0;
  always_ff @(posedge clk) cont_gnt_q <= req[CONT].req && rsp[CONT].gnt;
  always_ff @(negedge clk) begin
    if (!req[CONT].req || cont_gnt_q) begin
    req[CONT].req   <= cont_en && ($urandom_range(0, 1) == 1);
    req[CONT].we    <= 1'b0;
    req[CONT].addr  <= addr_t'($urandom_range(0, 255) * 8);
    req[CONT].wdata <= '0;
    end
  end

  task automatic preload(int words);
    for (int w = 0; w < words; w++) begin
      @(negedge clk);
      req[TBP] = '{req: 1'b1, we: 1'b1, addr: addr_t'(w*8), wdata: pat(addr_t'(w*8))};
    end
    @(negedge clk);
    req[TBP] = '0;
  endtask

  // run one configuration; rdy_mode 0: always ready, 1: random
  task automatic run(int rdy_mode, output int beats, output int cycles);
    int b[6];
    int n, got;
    addr_t exp_a[$];
    for (int d = 0; d < 6; d++) b[d] = (cfg.agu.bound[d] == 0) ? 1 : int'(cfg.agu.bound[d]);
    for (int i5 = 0; i5 < b[5]; i5++) for (int i4 = 0; i4 < b[4]; i4++)
    for (int i3 = 0; i3 < b[3]; i3++) for (int i2 = 0; i2 < b[2]; i2++)
    for (int i1 = 0; i1 < b[1]; i1++) for (int i0 = 0; i0 < b[0]; i0++)
      exp_a.push_back(cfg.agu.base + addr_t'(i0) * cfg.agu.stride[0] + addr_t'(i1) * cfg.agu.stride[1]
                      + addr_t'(i2) * cfg.agu.stride[2] + addr_t'(i3) * cfg.agu.stride[3]
                      + addr_t'(i4) * cfg.agu.stride[4] + addr_t'(i5) * cfg.agu.stride[5]);
    n = exp_a.size();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0; cycles = 1;
    while (got < n && cycles < 20000) begin
      out_ready = (rdy_mode == 0) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        for (int c = 0; c < NCH; c++) begin
          checks++;
          if (out_data[c*64 +: 64] !== pat(exp_a[got] + addr_t'(c) * cfg.ch_stride)) begin
            failures++;
            if (failures < 6) $display("beat %0d ch %0d got %h exp %h", got, c, out_data[c*64 +: 64],
                                       pat(exp_a[got] + addr_t'(c) * cfg.ch_stride));
          end
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
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after the last beat"); end
  endtask

  initial begin
    int beats, cycles;
    req = '0; out_ready = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    preload(4096);

    // 1) block-wise GEMM pattern, no contention: one beat per cycle
    cfg = '0;
    cfg.agu.base = 17'h0100;
    cfg.agu.bound[0] = 4;  cfg.agu.stride[0] = 17'd64;
    cfg.agu.bound[1] = 3;  cfg.agu.stride[1] = 17'd1024;
    cfg.agu.bound[2] = 2;  cfg.agu.stride[2] = 17'd0;    // reuse over n
    cfg.ch_stride = 17'd8;
    run(0, beats, cycles);
    $display("uncontended: %0d beats in %0d cycles", beats, cycles);
    checks++;
    if (cycles > beats + 5) failures++;   // 5 cycles of start-up latency

    // 2) prefetch: hold the consumer off, then the FIFOs deliver 8 beats back to back
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (30) @(negedge clk);
    begin
      int burst;
      addr_t a0;
      burst = 0;
      for (int i = 0; i < 8; i++) begin
        out_ready = 1; #1;
        if (out_valid) burst++;
        @(negedge clk);
      end
      checks++;
      if (burst != 8) begin failures++; $display("prefetched burst %0d", burst); end
      while (busy) begin out_ready = 1; @(negedge clk); end
      out_ready = 0;
    end

    // 3) strided im2col-like patterns with bank conflicts and random back-pressure
    cont_en = 1;
    for (int r = 0; r < 8; r++) begin
      cfg = '0;
      cfg.agu.base = addr_t'($urandom_range(0, 1023) * 8);
      for (int d = 0; d < 6; d++) begin
        cfg.agu.bound[d]  = 16'($urandom_range(1, 3));
        cfg.agu.stride[d] = addr_t'($urandom_range(0, 255) * 8);
      end
      cfg.ch_stride = addr_t'($urandom_range(1, 40) * 8);
      run(1, beats, cycles);
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
