// tb_csr_manager: writes random values to every configuration register and
// checks read-back and the decoded configuration fields; checks that a write
// to the start register pulses the selected start bits for exactly one cycle
// and that the busy register returns the units' busy flags.
module tb_csr_manager;
  import voltra_pkg::*;
  logic clk = 0, rst_n = 0;
  logic csr_we; logic [7:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  logic [NUM_UNITS-1:0] unit_busy, start;
  stream_cfg_t [NUM_ST-1:0] st_cfg;
  gemm_cfg_t gemm_cfg; simd_cfg_t simd_cfg; reshuf_cfg_t rs_cfg;
  logic [31:0] shadow [128];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  csr_manager dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .unit_busy,
                   .st_cfg, .gemm_cfg, .simd_cfg, .rs_cfg, .start);

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; unit_busy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 126; a++) begin
      shadow[a] = $urandom;
      wr(8'(a), shadow[a]);
    end
    for (int a = 0; a < 126; a++) begin
      csr_addr = 8'(a); #1;
      checks++;
      if (csr_rdata !== shadow[a]) failures++;
    end
    for (int s = 0; s < NUM_ST; s++) begin
      checks += 4;
      if (st_cfg[s].agu.base !== shadow[16*s][ADDR_W-1:0]) failures++;
      if (st_cfg[s].agu.bound[3] !== shadow[16*s+4][15:0]) failures++;
      if (st_cfg[s].agu.stride[5] !== shadow[16*s+12][ADDR_W-1:0]) failures++;
      if (st_cfg[s].ch_stride !== shadow[16*s+13][ADDR_W-1:0]) failures++;
    end
    checks += 5;
    if (gemm_cfg.k_tiles !== shadow[CSR_GEMM_K][15:0]) failures++;
    if (gemm_cfg.quant_en !== shadow[CSR_GEMM_FLAGS][1]) failures++;
    if (simd_cfg.mult !== shadow[CSR_SIMD_MULT]) failures++;
    if (simd_cfg.shift !== shadow[CSR_SIMD_SHIFT][5:0]) failures++;
    if (rs_cfg.window !== shadow[CSR_RS_WINDOW][15:0]) failures++;
    // start pulse
    @(negedge clk); csr_we = 1; csr_addr = CSR_START; csr_wdata = 32'h0000_0185;
    @(negedge clk); csr_we = 0;
    checks++;
    if (start !== 9'h185) failures++;
    @(negedge clk);
    checks++;
    if (start !== '0) failures++;
    // busy read-back
    unit_busy = 9'h0A6; csr_addr = CSR_BUSY; #1;
    checks++;
    if (csr_rdata !== 32'h0A6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
