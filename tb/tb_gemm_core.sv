// tb_gemm_core: feeds random int8 A and B tiles (and int32 partial sums) to
// the GEMM core in m, n, k order and compares every 8x8 int32 result tile
// with a software matrix product. Checks one k step per cycle with free-
// flowing streams, and correct stalling under random stream gaps.
module tb_gemm_core;
  import voltra_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  gemm_cfg_t cfg;
  logic [A_W-1:0] a_data; logic a_valid, a_ready;
  logic [B_W-1:0] b_data; logic b_valid, b_ready;
  logic [C_W-1:0] c_data; logic c_valid, c_ready;
  logic [C_W-1:0] d_data; logic d_valid, d_ready;
  logic busy, stall;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gemm_core dut (.clk, .rst_n, .start, .cfg, .a_data, .a_valid, .a_ready, .b_data, .b_valid, .b_ready,
                 .c_data, .c_valid, .c_ready, .d_data, .d_valid, .d_ready, .busy, .stall);

  // operand matrices for the current run: A[M*8][K*8], B[K*8][N*8] kept as tiles
  logic [A_W-1:0] at [int];   // key m*256+k
  logic [B_W-1:0] bt [int];   // key n*256+k
  logic [C_W-1:0] ct [int];   // key m*256+n

  function automatic logic [C_W-1:0] ref_tile(int m, int n, int kt, logic pe);
    logic [C_W-1:0] r;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        int s;
        s = pe ? int'(signed'(ct[m*256+n][(i*8+j)*32 +: 32])) : 0;
        for (int k = 0; k < kt; k++)
          for (int kk = 0; kk < 8; kk++)
            s += int'(signed'(at[m*256+k][(i*8+kk)*8 +: 8])) * int'(signed'(bt[n*256+k][(j*8+kk)*8 +: 8]));
        r[(i*8+j)*32 +: 32] = s;
      end
    return r;
  endfunction

  task automatic run(int M, int N, int K, logic pe, int gaps, output int cycles);
    int ai, ci, di;
    int am, an, ak, cm, cn, dm, dn;
    at.delete(); bt.delete(); ct.delete();
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++)
      for (int i = 0; i < 16; i++) at[m*256+k][i*32 +: 32] = $urandom;
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++)
      for (int i = 0; i < 16; i++) bt[n*256+k][i*32 +: 32] = $urandom;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < 64; i++) ct[m*256+n][i*32 +: 32] = $urandom;
    cfg = '{m_tiles: 16'(M), n_tiles: 16'(N), k_tiles: 16'(K), psum_en: pe, quant_en: 1'b0};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    ai = 0; ci = 0; di = 0; cycles = 0;
    while (di < M*N && cycles < 100000) begin
      logic fa, fc, fd;
      // A and B are sent together in m, n, k order
      am = ai / (N*K); an = (ai / K) % N; ak = ai % K;
      cm = ci / N; cn = ci % N;
      a_valid = (ai < M*N*K) && (gaps == 0 || $urandom_range(0, 3) != 0);
      b_valid = a_valid;
      a_data  = at[am*256+ak];
      b_data  = bt[an*256+ak];
      c_valid = (ci < M*N) && (gaps == 0 || $urandom_range(0, 2) != 0);
      c_data  = ct[cm*256+cn];
      d_ready = (gaps == 0) || ($urandom_range(0, 2) != 0);
      #1;
      fa = a_valid && a_ready;
      fc = c_valid && c_ready;
      fd = d_valid && d_ready;
      checks++;
      if (a_ready != b_ready) failures++;
      if (fd) begin
        dm = di / N; dn = di % N;
        checks++;
        if (d_data !== ref_tile(dm, dn, K, pe)) begin
          failures++;
          if (failures < 4) $display("tile (%0d,%0d) mismatch", dm, dn);
        end
        di++;
      end
      @(negedge clk);
      if (fa) ai++;
      if (fc) ci++;
      cycles++;
    end
    a_valid = 0; b_valid = 0; c_valid = 0; d_ready = 0;
    checks++;
    if (di != M*N || ai != M*N*K || (pe && ci != M*N)) begin
      failures++;
      $display("run %0dx%0dx%0d: %0d tiles, %0d steps, %0d psums", M, N, K, di, ai, ci);
    end
    @(negedge clk);
    checks++;
    if (busy) failures++;
  endtask

  initial begin
    int cyc;
    a_valid = 0; b_valid = 0; c_valid = 0; d_ready = 0; cfg = '0;
    a_data = '0; b_data = '0; c_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, 3, 4, 1'b0, 0, cyc);
    $display("2x3x4 tiles, free flowing: %0d cycles", cyc);
    checks++;
    if (cyc != 2*3*4 + 1) failures++;     // one k step per cycle, +1 to drain the last result
    run(1, 1, 1, 1'b1, 0, cyc);
    run(3, 2, 5, 1'b1, 1, cyc);
    run(2, 2, 1, 1'b0, 1, cyc);
    run(4, 1, 3, 1'b1, 1, cyc);
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
