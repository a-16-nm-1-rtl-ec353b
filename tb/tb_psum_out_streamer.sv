// tb_psum_out_streamer: runs the partial-sum reader and the output writer at
// the same time over their shared 32 crossbar ports. Checks the psum beats
// against the preloaded memory, reads the written output beats back, checks
// that the writer is never granted while the reader requests (psum priority)
// and that such deferrals did happen.
module tb_psum_out_streamer;
  import voltra_pkg::*;
  localparam int NP = 33, TBP = 32;
  logic clk = 0, rst_n = 0, psum_start = 0, out_start = 0;
  stream_cfg_t psum_cfg, out_cfg;
  mem_req_t [NP-1:0] req;
  mem_rsp_t [NP-1:0] rsp;
  logic [BANKS-1:0] bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0] bank_wdata, bank_rdata;
  logic [C_W-1:0] psum_data, out_data;
  logic psum_valid, psum_ready, out_valid, out_ready, psum_busy, out_busy, out_deferred;
  int checks = 0, failures = 0, deferred = 0, prio_viol = 0;
  word_t model [addr_t];

  always #5 clk = ~clk;

  psum_out_streamer #(.DEPTH(1), .DIMS(3)) dut (
    .clk, .rst_n, .psum_start, .psum_cfg, .out_start, .out_cfg,
    .psum_data, .psum_valid, .psum_ready, .out_data, .out_valid, .out_ready,
    .mem_req(req[31:0]), .mem_rsp(rsp[31:0]), .psum_busy, .out_busy, .out_deferred);
  mem_xbar #(.NPORTS(NP)) u_xbar (.clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);
  shared_memory u_mem (.clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata);

  function automatic word_t pat(addr_t a);
    return {32'(a) ^ 32'h1234_0000, 32'(a) * 32'h9E37_79B1};
  endfunction

  // priority monitor
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (out_deferred) deferred <= deferred + 1;
      for (int i = 0; i < 32; i++)
        if (dut.rd_sel && dut.wr_rsp[i].gnt) prio_viol <= prio_viol + 1;
    end
  end

  initial begin
    int pgot, osent, cyc;
    word_t d;
    req = '0; psum_ready = 0; out_valid = 0; out_data = '0;
    psum_cfg = '0; out_cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 32*8; w++) begin
      @(negedge clk);
      req[TBP] = '{req: 1'b1, we: 1'b1, addr: addr_t'(w*8), wdata: pat(addr_t'(w*8))};
    end
    @(negedge clk);
    req[TBP] = '0;

    psum_cfg.agu.base = 17'h0000; psum_cfg.agu.bound[0] = 8; psum_cfg.agu.stride[0] = 17'd256;
    out_cfg.agu.base  = 17'h8000; out_cfg.agu.bound[0]  = 8; out_cfg.agu.stride[0]  = 17'd256;
    @(negedge clk); psum_start = 1; out_start = 1; @(negedge clk); psum_start = 0; out_start = 0;
    pgot = 0; osent = 0; cyc = 0;
    while ((pgot < 8 || osent < 8) && cyc < 5000) begin
      logic ofire;
      psum_ready = 1'($urandom_range(0, 1));
      if (!out_valid && osent < 8) begin
        for (int i = 0; i < 64; i++) out_data[i*32 +: 32] = $urandom;
        out_valid = 1;
      end
      #1;
      if (psum_valid && psum_ready) begin
        for (int j = 0; j < 32; j++) begin
          checks++;
          if (psum_data[j*64 +: 64] !== pat(addr_t'(pgot*256 + j*8))) failures++;
        end
        pgot++;
      end
      ofire = out_valid && out_ready;
      if (ofire) begin
        for (int j = 0; j < 32; j++) model[addr_t'(17'h8000 + osent*256 + j*8)] = out_data[j*64 +: 64];
        osent++;
      end
      @(negedge clk);
      if (ofire) out_valid = 0;
      cyc++;
    end
    out_valid = 0; psum_ready = 0;
    checks++;
    if (pgot != 8 || osent != 8) begin failures++; $display("psum %0d out %0d", pgot, osent); end
    for (int i = 0; i < 100 && out_busy; i++) @(negedge clk);
    foreach (model[a]) begin
      @(negedge clk);
      req[TBP] = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
      @(negedge clk);
      req[TBP] = '0;
      #1;
      checks++;
      if (rsp[TBP].rdata !== model[a]) failures++;
    end
    $display("deferred output cycles: %0d, priority violations: %0d", deferred, prio_viol);
    checks += 2;
    if (deferred == 0) failures++;
    if (prio_viol != 0) failures++;
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
