// tb_voltra_top: end-to-end test of the accelerator at its full default size.
//
// Acting as the control core (CSR port) and the DMA (512-bit memory port), it
//  1. loads A (16x32 int8, row-major), B (32x24 int8, pre-tiled 8x8 blocks),
//     partial sums C (16x24 int32 tiles) and a pooling source into the shared
//     memory;
//  2. GEMM run 1: O = quant(A*B) with the SIMD unit, written row-major by the
//     Q_Out streamer, while the reshuffler max-pools the source in parallel;
//  3. GEMM run 2: D = C + A*B in int32, with B stored transposed and
//     re-transposed on the fly by the weight streamer, partial sums read and
//     results written through the time-multiplexed psum/output streamers,
//     while the reshuffler transposes 8x8 blocks;
//  4. reads everything back over the DMA port and compares with a software
//     model. It counts how often each mechanism occurred (bank conflicts,
//     FIFO prefetch, psum-over-output priority, transposer, quantization,
//     psum loads, maxpool, layout transpose, GEMM stalls) and fails any that
//     never did.
module tb_voltra_top;
  import voltra_pkg::*;
  localparam int M = 16, N = 24, K = 32;
  localparam int MT = M/8, NT = N/8, KT = K/8;
  localparam addr_t A_BASE = 17'h00000, B_BASE = 17'h01000, BT_BASE = 17'h01800,
                    C_BASE = 17'h02000, O_BASE = 17'h04000, D_BASE = 17'h06000,
                    RS_SRC = 17'h08000, RS_POOL = 17'h0A000, RS_TR = 17'h0B000;

  logic clk = 0, rst_n = 0;
  logic csr_we; logic [7:0] csr_addr; logic [31:0] csr_wdata, csr_rdata;
  mem_req_t [7:0] dma_req;
  mem_rsp_t [7:0] dma_rsp;
  logic [NUM_UNITS-1:0] busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  voltra_top dut (.clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .dma_req, .dma_rsp, .busy);

  // ---------------- operands ----------------
  logic signed [7:0]  A [M][K];
  logic signed [7:0]  B [K][N];
  logic signed [31:0] C [M][N];
  logic [63:0]        src [64];   // pooling / transpose source vectors
  simd_cfg_t          qc;

  // ---------------- mechanism counters ----------------
  int n_conflict = 0, n_prefetch = 0, n_defer = 0, n_psum = 0, n_stall = 0;
  always_ff @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 72; p++)
      if (dut.req[p].req && !dut.rsp[p].gnt) n_conflict <= n_conflict + 1;
    if (dut.u_input_st.g_ch[0].df_count >= 2) n_prefetch <= n_prefetch + 1;
    if (dut.out_deferred) n_defer <= n_defer + 1;
    if (dut.c_valid && dut.c_ready) n_psum <= n_psum + 1;
    if (dut.gemm_stall) n_stall <= n_stall + 1;
  end

  // ---------------- CSR and DMA access ----------------
  task automatic csr_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask

  task automatic st_cfg(int s, addr_t base, int b0, int s0, int b1, int s1, int b2, int s2, int chs, bit tr);
    csr_wr(8'(16*s + 0), 32'(base));
    csr_wr(8'(16*s + 1), 32'(b0)); csr_wr(8'(16*s + 7), 32'(s0));
    csr_wr(8'(16*s + 2), 32'(b1)); csr_wr(8'(16*s + 8), 32'(s1));
    csr_wr(8'(16*s + 3), 32'(b2)); csr_wr(8'(16*s + 9), 32'(s2));
    for (int d = 3; d < 6; d++) begin csr_wr(8'(16*s + 1 + d), 32'd1); csr_wr(8'(16*s + 7 + d), 32'd0); end
    csr_wr(8'(16*s + 13), 32'(chs));
    csr_wr(8'(16*s + 14), 32'(tr));
  endtask

  // write 8 consecutive words (one 512-bit DMA beat) at an aligned address
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

  // byte image helpers
  logic [7:0] img [addr_t];
  task automatic flush_img();
    addr_t lines [$];
    foreach (img[a]) if (a[5:0] == 0) lines.push_back(a);
    foreach (lines[i]) begin
      logic [511:0] d;
      for (int b = 0; b < 64; b++) d[b*8 +: 8] = img.exists(lines[i] + addr_t'(b)) ? img[lines[i] + addr_t'(b)] : 8'h00;
      dma_write(lines[i], d);
    end
    img.delete();
  endtask

  function automatic logic [7:0] q8(int x);
    longint v, p;
    v = (qc.relu && x < 0) ? 0 : longint'(x);
    p = v * longint'(qc.mult);
    if (qc.shift != 0) p = p + (longint'(1) <<< (qc.shift - 1));
    p = (p >>> qc.shift) + longint'(qc.zp);
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return p[7:0];
  endfunction

  function automatic int dotref(int i, int j);
    int s = 0;
    for (int k = 0; k < K; k++) s += int'(A[i][k]) * int'(B[k][j]);
    return s;
  endfunction

  task automatic wait_idle(int limit, output int cycles);
    cycles = 0;
    @(negedge clk);
    while (busy != 0 && cycles < limit) begin @(negedge clk); cycles++; end
    checks++;
    if (busy != 0) begin failures++; $display("still busy: %b", busy); end
  endtask

  initial begin
    int cyc;
    logic [511:0] d;
    csr_we = 0; csr_addr = 0; csr_wdata = 0; dma_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- operands ----
    foreach (A[i, k]) A[i][k] = 8'($urandom);
    foreach (B[k, j]) B[k][j] = 8'($urandom);
    foreach (C[i, j]) C[i][j] = $signed($urandom_range(0, 200000)) - 100000;
    foreach (src[v]) src[v] = {$urandom, $urandom};
    // A row-major, pitch K bytes
    foreach (A[i, k]) img[A_BASE + addr_t'(i*K + k)] = A[i][k];
    // B tiles (n,k): byte n'*8+k' = B[k*8+k'][n*8+n'] ; transposed copy: byte k'*8+n'
    for (int n = 0; n < NT; n++) for (int k = 0; k < KT; k++) for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++) begin
      img[B_BASE  + addr_t'((n*KT + k)*64 + a*8 + b)] = B[k*8+b][n*8+a];
      img[BT_BASE + addr_t'((n*KT + k)*64 + a*8 + b)] = B[k*8+a][n*8+b];
    end
    // C tiles (m,n): word m'*8+n' of a 256-byte block
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
      for (int y = 0; y < 4; y++) img[C_BASE + addr_t'((m*NT + n)*256 + (a*8+b)*4 + y)] = C[m*8+a][n*8+b][y*8 +: 8];
    foreach (src[v]) for (int y = 0; y < 8; y++) img[RS_SRC + addr_t'(v*8 + y)] = src[v][y*8 +: 8];
    flush_img();

    // ---- run 1: quantized GEMM + maxpool ----
    qc = '{mult: 32'sd5, shift: 6'd9, zp: -8'sd3, relu: 1'b1};
    // input streamer: k innermost, n reuse, m; channel c = row c of the tile
    st_cfg(ST_INPUT, A_BASE, KT, 8, NT, 0, MT, 8*K, K, 0);
    st_cfg(ST_WEIGHT, B_BASE, KT, 64, NT, KT*64, MT, 0, 0, 0);
    st_cfg(ST_QOUT, O_BASE, NT, 8, MT, 8*N, 1, 0, N, 0);
    csr_wr(CSR_GEMM_M, MT); csr_wr(CSR_GEMM_N, NT); csr_wr(CSR_GEMM_K, KT);
    csr_wr(CSR_GEMM_FLAGS, 32'h2);
    csr_wr(CSR_SIMD_MULT, 32'(qc.mult)); csr_wr(CSR_SIMD_SHIFT, 32'(qc.shift));
    csr_wr(CSR_SIMD_ZP, 32'(qc.zp)); csr_wr(CSR_SIMD_RELU, 32'(qc.relu));
    st_cfg(ST_RIN, RS_SRC, 8, 64, 1, 0, 1, 0, 8, 0);
    st_cfg(ST_ROUT, RS_POOL, 2, 64, 1, 0, 1, 0, 8, 0);
    csr_wr(CSR_RS_MODE, 32'(RS_MAXPOOL)); csr_wr(CSR_RS_WINDOW, 32'd4);
    csr_wr(CSR_START, (1 << ST_INPUT) | (1 << ST_WEIGHT) | (1 << ST_QOUT) | (1 << UNIT_GEMM)
                      | (1 << ST_RIN) | (1 << ST_ROUT) | (1 << UNIT_RESHUF));
    wait_idle(5000, cyc);
    $display("run 1 (%0dx%0dx%0d quantized GEMM + maxpool): %0d cycles for %0d k-steps", M, N, K, cyc, MT*NT*KT);

    // check O
    for (int i = 0; i < M; i++) begin
      dma_read(O_BASE + addr_t'(i*N) - addr_t'((i*N) % 64), d);
      for (int j = 0; j < N; j++) begin
        int off;
        off = (i*N + j) % 64;
        if (off + 0 < 64) begin
          checks++;
          if (d[off*8 +: 8] !== q8(dotref(i, j))) begin
            failures++;
            if (failures < 5) $display("O[%0d][%0d] = %h exp %h", i, j, d[off*8 +: 8], q8(dotref(i, j)));
          end
        end
        if (off == 63 && j != N-1) dma_read(O_BASE + addr_t'(i*N + j + 1), d);
      end
    end
    // check pooled vectors
    for (int b = 0; b < 2; b++) begin
      dma_read(RS_POOL + addr_t'(b*64), d);
      for (int o = 0; o < 8; o++) begin
        logic [63:0] e;
        for (int l = 0; l < 8; l++) begin
          e[l*8 +: 8] = src[(b*8+o)*4][l*8 +: 8];
          for (int w = 1; w < 4; w++)
            if ($signed(src[(b*8+o)*4+w][l*8 +: 8]) > $signed(e[l*8 +: 8])) e[l*8 +: 8] = src[(b*8+o)*4+w][l*8 +: 8];
        end
        checks++;
        if (d[o*64 +: 64] !== e) begin failures++; $display("pool %0d mismatch", b*8+o); end
      end
    end

    // ---- run 2: int32 GEMM with partial sums, transposed weights, block transpose ----
    st_cfg(ST_WEIGHT, BT_BASE, KT, 64, NT, KT*64, MT, 0, 0, 1);
    st_cfg(ST_PSUM, C_BASE, NT, 256, MT, NT*256, 1, 0, 0, 0);
    st_cfg(ST_OUTPUT, D_BASE, NT, 256, MT, NT*256, 1, 0, 0, 0);
    csr_wr(CSR_GEMM_FLAGS, 32'h1);
    st_cfg(ST_RIN, RS_SRC, 8, 64, 1, 0, 1, 0, 8, 0);
    st_cfg(ST_ROUT, RS_TR, 8, 64, 1, 0, 1, 0, 8, 0);
    csr_wr(CSR_RS_MODE, 32'(RS_TRANSPOSE));
    csr_wr(CSR_START, (1 << ST_INPUT) | (1 << ST_WEIGHT) | (1 << ST_PSUM) | (1 << ST_OUTPUT)
                      | (1 << UNIT_GEMM) | (1 << ST_RIN) | (1 << ST_ROUT) | (1 << UNIT_RESHUF));
    wait_idle(5000, cyc);
    $display("run 2 (int32 GEMM with psum, transposed weights): %0d cycles", cyc);
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) for (int l = 0; l < 4; l++) begin
      dma_read(D_BASE + addr_t'((m*NT + n)*256 + l*64), d);
      for (int w = 0; w < 16; w++) begin
        int a, b, e;
        a = (l*16 + w) / 8; b = (l*16 + w) % 8;
        e = C[m*8+a][n*8+b] + dotref(m*8+a, n*8+b);
        checks++;
        if ($signed(d[w*32 +: 32]) != e) begin
          failures++;
          if (failures < 8) $display("D[%0d][%0d] = %0d exp %0d", m*8+a, n*8+b, $signed(d[w*32 +: 32]), e);
        end
      end
    end
    for (int b = 0; b < 8; b++) begin
      dma_read(RS_TR + addr_t'(b*64), d);
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
        checks++;
        if (d[(r*8+c)*8 +: 8] !== src[b*8+c][r*8 +: 8]) failures++;
      end
    end

    // ---- mechanisms ----
    $display("bank conflicts %0d, prefetch cycles %0d, deferred outputs %0d, psum loads %0d, gemm stalls %0d",
             n_conflict, n_prefetch, n_defer, n_psum, n_stall);
    checks += 5;
    if (n_conflict == 0) failures++;
    if (n_prefetch == 0) failures++;
    if (n_defer == 0) failures++;
    if (n_psum != MT*NT) failures++;
    if (n_stall == 0) failures++;
    // busy read-back over CSR
    csr_addr = CSR_BUSY; #1;
    checks++;
    if (csr_rdata != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
