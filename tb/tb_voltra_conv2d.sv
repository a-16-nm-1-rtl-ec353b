// tb_voltra_conv2d: a 2-D convolution run as a GEMM with implicit im2col.
//
// The convolution of an H x W x C int8 feature map with F x F x C x N
// weights, stride S and no padding, is the GEMM O[p][n] = sum_k A[p][k] W[k][n]
// with p an output pixel and k = (channel group, fy, fx, channel). No im2col
// matrix is built: the feature map is stored in C/8 x H x W x 8 layout (eight
// channels per 64-bit word), and the input streamer's six AGU loops walk
// fx, fy, channel group (the K loop), the N-tile reuse, the block of eight
// output pixels along a row and the output row, while its eight channels
// fetch the eight neighbouring output pixels of a block through the channel
// stride S*8 bytes. Weights are blocked 8x8 tiles (byte n'*8+c') read by the
// 3-D weight streamer; results are 32-bit 8x8 tiles (8 pixels x 8 output
// channels) written by the output streamer. Two layers are run, stride 1 and
// stride 2, and every output is compared with a direct convolution computed
// here. Sizes are this test's choice; the output width must be a multiple of
// eight.
module tb_voltra_conv2d;
  import voltra_pkg::*;

  logic clk = 0, rst_n = 0;
  logic csr_we; logic [7:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  mem_req_t [7:0] dma_req;
  mem_rsp_t [7:0] dma_rsp;
  logic [NUM_UNITS-1:0] busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  voltra_top dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .dma_req, .dma_rsp, .busy);

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


  task automatic run_conv(int H, int W, int C, int F, int S, int N);
    int OH, OW, CG, NT, KT, MT, x_base, w_base, d_base, cyc, bad;
    logic signed [7:0] X [];
    logic signed [7:0] Wt [];
    logic [511:0] d;
    OH = (H - F) / S + 1; OW = (W - F) / S + 1;
    CG = C/8; NT = N/8; KT = CG*F*F; MT = OH*OW/8;
    x_base = 0;
    w_base = align64(H*W*C);
    d_base = align64(w_base + NT*KT*64);
    if (d_base + OH*OW*N*4 > 131072) begin failures++; $display("conv does not fit"); return; end
    X = new[H*W*C]; Wt = new[F*F*C*N];
    foreach (X[i]) X[i] = 8'($urandom);
    foreach (Wt[i]) Wt[i] = 8'($urandom);
    // X[(y*W + x)*C + c] at ((c/8)*H*W + y*W + x)*8 + c%8
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < C; c++)
      img[addr_t'(x_base + ((c/8)*H*W + y*W + x)*8 + c%8)] = X[(y*W + x)*C + c];
    // Wt[((fy*F + fx)*C + c)*N + n]; k step ks = (g*F + fy)*F + fx, tile (nt, ks)
    for (int nt = 0; nt < NT; nt++) for (int g = 0; g < CG; g++) for (int fy = 0; fy < F; fy++)
      for (int fx = 0; fx < F; fx++) for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
        img[addr_t'(w_base + (nt*KT + (g*F + fy)*F + fx)*64 + a*8 + b)] = Wt[((fy*F + fx)*C + g*8+b)*N + nt*8+a];
    flush_img();

    // input streamer: 6-D implicit im2col
    csr_wr(8'(16*ST_INPUT + 0), 32'(x_base));
    csr_wr(8'(16*ST_INPUT + 1), 32'(F));      csr_wr(8'(16*ST_INPUT + 7),  32'(8));
    csr_wr(8'(16*ST_INPUT + 2), 32'(F));      csr_wr(8'(16*ST_INPUT + 8),  32'(W*8));
    csr_wr(8'(16*ST_INPUT + 3), 32'(CG));     csr_wr(8'(16*ST_INPUT + 9),  32'(H*W*8));
    csr_wr(8'(16*ST_INPUT + 4), 32'(NT));     csr_wr(8'(16*ST_INPUT + 10), 32'(0));
    csr_wr(8'(16*ST_INPUT + 5), 32'(OW/8));   csr_wr(8'(16*ST_INPUT + 11), 32'(8*S*8));
    csr_wr(8'(16*ST_INPUT + 6), 32'(OH));     csr_wr(8'(16*ST_INPUT + 12), 32'(S*W*8));
    csr_wr(8'(16*ST_INPUT + 13), 32'(S*8));
    csr_wr(8'(16*ST_INPUT + 14), 32'(0));
    st_cfg(ST_WEIGHT, addr_t'(w_base), KT, 64, NT, KT*64, MT, 0, 0);
    st_cfg(ST_OUTPUT, addr_t'(d_base), NT, 256, MT, NT*256, 1, 0, 0);
    csr_wr(CSR_GEMM_M, 32'(MT)); csr_wr(CSR_GEMM_N, 32'(NT)); csr_wr(CSR_GEMM_K, 32'(KT));
    csr_wr(CSR_GEMM_FLAGS, 32'h0);
    @(negedge clk);
    gemm_cycles = 0;
    csr_wr(CSR_START, (1 << ST_INPUT) | (1 << ST_WEIGHT) | (1 << ST_OUTPUT) | (1 << UNIT_GEMM));
    cyc = 0;
    repeat (2) begin @(negedge clk); cyc++; end
    while (busy != 0 && cyc < 200000) begin @(negedge clk); cyc++; end
    checks++;
    if (busy != 0) begin failures++; $display("conv still busy"); return; end
    $display("conv %0dx%0dx%0d, %0dx%0d kernel, stride %0d, %0d filters: %0d k-steps in %0d core cycles",
             H, W, C, F, F, S, N, MT*NT*KT, gemm_cycles);

    bad = 0;
    for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++) for (int l = 0; l < 4; l++) begin
      dma_read(addr_t'(d_base + (mt*NT + nt)*256 + l*64), d);
      for (int w = 0; w < 16; w++) begin
        int a, b, p, oy, ox, e;
        a = (l*16 + w) / 8; b = (l*16 + w) % 8;
        p = mt*8 + a; oy = p / OW; ox = p % OW;
        e = 0;
        for (int fy = 0; fy < F; fy++) for (int fx = 0; fx < F; fx++) for (int c = 0; c < C; c++)
          e += int'(X[((oy*S + fy)*W + ox*S + fx)*C + c]) * int'(Wt[((fy*F + fx)*C + c)*N + nt*8+b]);
        checks++;
        if ($signed(d[w*32 +: 32]) != e) begin
          failures++; bad++;
          if (bad < 5) $display("  O[y%0d x%0d][%0d] = %0d exp %0d", oy, ox, nt*8+b, $signed(d[w*32 +: 32]), e);
        end
      end
    end
  endtask

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; dma_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_conv(10, 10, 16, 3, 1, 16);
    run_conv(17, 17, 16, 3, 2, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
