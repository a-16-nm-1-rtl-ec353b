// tb_voltra_gemm_workloads: the dense GEMM sizes the chip was measured on,
// run end to end through the accelerator at its default parameters.
//
// For each size M x K x N (32x32x32, 80x80x80, 96x96x96 and 24x1024x64) it
// acts as control core and DMA: loads A row-major and B in blocked layout
// (8x8 tiles of 64 bytes, byte n'*8+k') into the shared memory, has the data
// reshuffler copy A into blocked layout (byte m'*8+k'; its In streamer
// gathers eight rows through the channel stride), then runs one GEMM
// with 32-bit results written by the output streamer as 8x8 tiles (word
// m'*8+n'), reads every result back and compares it with a software model.
// All operands of each size are in the 128 KB memory at once. The tile rows
// of A and B are padded to a multiple of four tiles and B starts two super
// banks after a multiple of four, so the A and B tiles read in the same
// cycle always lie in different super banks: a placement the software (or
// the DMA that writes the blocked layout) chooses. The test prints the cycles the
// GEMM core was busy against the ideal count of one cycle per k step and
// checks that this temporal utilization is at least 76.99 %, the lowest
// figure the chip reports for its tiled workloads.
module tb_voltra_gemm_workloads;
  import voltra_pkg::*;

  logic clk = 0, rst_n = 0;
  logic csr_we; logic [7:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  mem_req_t [7:0] dma_req;
  mem_rsp_t [7:0] dma_rsp;
  logic [NUM_UNITS-1:0] busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  voltra_top dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .dma_req, .dma_rsp, .busy);

  // GEMM-core busy cycles, counted by the testbench
  int gemm_cycles = 0;
  always_ff @(posedge clk) if (rst_n && busy[UNIT_GEMM]) gemm_cycles <= gemm_cycles + 1;

  task automatic csr_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  task automatic st_cfg(int s, addr_t base, int b0, int s0, int b1, int s1, int b2, int s2, int chs);
    csr_wr(8'(16*s + 0), 32'(base));
    csr_wr(8'(16*s + 1), 32'(b0)); csr_wr(8'(16*s + 7), 32'(s0));
    csr_wr(8'(16*s + 2), 32'(b1)); csr_wr(8'(16*s + 8), 32'(s1));
    csr_wr(8'(16*s + 3), 32'(b2)); csr_wr(8'(16*s + 9), 32'(s2));
    for (int d = 3; d < 6; d++) begin csr_wr(8'(16*s + 1 + d), 32'd1); csr_wr(8'(16*s + 7 + d), 32'd0); end
    csr_wr(8'(16*s + 13), 32'(chs));
    csr_wr(8'(16*s + 14), 32'd0);
  endtask

  task automatic dma_write(addr_t a, logic [511:0] d);
    logic [7:0] pend;
    @(negedge clk);
    for (int j = 0; j < 8; j++) dma_req[j] = '{req: 1'b1, we: 1'b1, addr: a + addr_t'(8*j), wdata: d[j*64 +: 64]};
    pend = '1;
    while (pend != 0) begin
      #1;
      for (int j = 0; j < 8; j++) if (dma_rsp[j].gnt) pend[j] = 0;
      @(negedge clk);
      for (int j = 0; j < 8; j++) if (!pend[j]) dma_req[j].req = 1'b0;
    end
  endtask

  task automatic dma_read(addr_t a, output logic [511:0] d);
    logic [7:0] pend;
    for (int j = 0; j < 8; j++) dma_req[j] = '{req: 1'b1, we: 1'b0, addr: a + addr_t'(8*j), wdata: '0};
    pend = '1;
    while (pend != 0) begin
      logic [7:0] g;
      #1;
      g = '0;
      for (int j = 0; j < 8; j++) if (pend[j] && dma_rsp[j].gnt) g[j] = 1;
      @(negedge clk);
      #1;
      for (int j = 0; j < 8; j++) if (g[j]) begin d[j*64 +: 64] = dma_rsp[j].rdata; pend[j] = 0; dma_req[j].req = 1'b0; end
    end
    @(negedge clk);
  endtask

  // sparse byte image of the memory, written out in 64-byte lines
  logic [7:0] img [addr_t];
  task automatic flush_img();
    addr_t lines [$];
    bit seen [addr_t];
    foreach (img[a]) seen[a & ~addr_t'(63)] = 1'b1;
    foreach (seen[a]) lines.push_back(a);
    foreach (lines[i]) begin
      logic [511:0] d;
      for (int b = 0; b < 64; b++) d[b*8 +: 8] = img.exists(lines[i] + addr_t'(b)) ? img[lines[i] + addr_t'(b)] : 8'h00;
      dma_write(lines[i], d);
    end
    img.delete();
  endtask

  function automatic int align64(int x);
    return (x + 63) / 64 * 64;
  endfunction

  task automatic run_gemm(int M, int K, int N);
    int MT, NT, KT, KTP, a_base, b_base, d_base, r_base, cyc, ideal, bad;
    logic signed [7:0] A [];
    logic signed [7:0] B [];
    logic [511:0] d;
    real util;
    MT = M/8; NT = N/8; KT = K/8;
    KTP = (KT + 3) / 4 * 4;
    a_base = 0;
    b_base = MT*KTP*64 + 128;
    d_base = align64(b_base + NT*KTP*64);
    r_base = d_base + M*N*4;
    if (r_base + M*K > 131072) begin failures++; $display("%0dx%0dx%0d does not fit", M, K, N); return; end
    A = new[M*K]; B = new[K*N];
    foreach (A[i]) A[i] = 8'($urandom);
    foreach (B[i]) B[i] = 8'($urandom);
    for (int m = 0; m < MT; m++) for (int k = 0; k < KT; k++) for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
      img[addr_t'(r_base + (m*8+a)*K + k*8+b)] = A[(m*8+a)*K + k*8+b];
    for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++) for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
      img[addr_t'(b_base + (n*KTP + k)*64 + a*8 + b)] = B[(k*8+b)*N + n*8+a];
    flush_img();

    // reshuffler: row-major A -> blocked A (copy mode; the layout change is in
    // the two streamers' address patterns)
    st_cfg(ST_RIN,  addr_t'(r_base), KT, 8,  MT, 8*K,    1, 0, K);
    st_cfg(ST_ROUT, addr_t'(a_base), KT, 64, MT, KTP*64, 1, 0, 8);
    csr_wr(CSR_RS_MODE, 32'(RS_COPY));
    csr_wr(CSR_START, (1 << ST_RIN) | (1 << ST_ROUT) | (1 << UNIT_RESHUF));
    cyc = 0;
    repeat (2) begin @(negedge clk); cyc++; end
    while (busy != 0 && cyc < 200000) begin @(negedge clk); cyc++; end
    checks++;
    if (busy != 0) begin failures++; $display("%0dx%0dx%0d reshuffle still busy", M, K, N); return; end
    $display("reshuffle of A (%0d tiles) to blocked layout: %0d cycles", MT*KT, cyc);

    st_cfg(ST_INPUT,  addr_t'(a_base), KT, 64, NT, 0,      MT, KTP*64, 8);
    st_cfg(ST_WEIGHT, addr_t'(b_base), KT, 64, NT, KTP*64, MT, 0,      0);
    st_cfg(ST_OUTPUT, addr_t'(d_base), NT, 256, MT, NT*256, 1, 0,    0);
    csr_wr(CSR_GEMM_M, 32'(MT)); csr_wr(CSR_GEMM_N, 32'(NT)); csr_wr(CSR_GEMM_K, 32'(KT));
    csr_wr(CSR_GEMM_FLAGS, 32'h0);
    @(negedge clk);
    gemm_cycles = 0;
    csr_wr(CSR_START, (1 << ST_INPUT) | (1 << ST_WEIGHT) | (1 << ST_OUTPUT) | (1 << UNIT_GEMM));
    cyc = 0;
    repeat (2) begin @(negedge clk); cyc++; end
    while (busy != 0 && cyc < 200000) begin @(negedge clk); cyc++; end
    checks++;
    if (busy != 0) begin failures++; $display("%0dx%0dx%0d still busy", M, K, N); return; end

    ideal = MT*NT*KT;
    util = 100.0 * real'(ideal) / real'(gemm_cycles);
    $display("GEMM M=%0d K=%0d N=%0d: %0d k-steps in %0d core cycles (%0d to idle), temporal utilization %0.2f %%",
             M, K, N, ideal, gemm_cycles, cyc, util);
    checks++;
    if (util < 76.99) begin failures++; $display("  utilization below 76.99 %%"); end

    bad = 0;
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) for (int l = 0; l < 4; l++) begin
      dma_read(addr_t'(d_base + (m*NT + n)*256 + l*64), d);
      for (int w = 0; w < 16; w++) begin
        int a, b, e;
        a = (l*16 + w) / 8; b = (l*16 + w) % 8;
        e = 0;
        for (int k = 0; k < K; k++) e += int'(A[(m*8+a)*K + k]) * int'(B[k*N + n*8+b]);
        checks++;
        if ($signed(d[w*32 +: 32]) != e) begin
          failures++; bad++;
          if (bad < 5) $display("  D[%0d][%0d] = %0d exp %0d", m*8+a, n*8+b, $signed(d[w*32 +: 32]), e);
        end
      end
    end
  endtask

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; dma_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_gemm(32, 32, 32);
    run_gemm(80, 80, 80);
    run_gemm(96, 96, 96);
    run_gemm(24, 1024, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
