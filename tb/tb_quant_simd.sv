// tb_quant_simd: sends random 8x8 int32 tiles with random quantization
// settings and compares the 64 int8 results with a software requantization.
// Checks the time-multiplexed rate: back-to-back tiles leave every 8 cycles.
module tb_quant_simd;
  import voltra_pkg::*;
  logic clk = 0, rst_n = 0;
  simd_cfg_t cfg;
  logic [C_W-1:0] in_data; logic in_valid, in_ready;
  logic [511:0] out_data;  logic out_valid, out_ready;
  int checks = 0, failures = 0;
  logic [511:0] exp_q[$];

  always #5 clk = ~clk;

  quant_simd #(.LANES(8)) dut (.clk, .rst_n, .cfg, .in_data, .in_valid, .in_ready,
                               .out_data, .out_valid, .out_ready);

  function automatic logic [7:0] qref(logic signed [31:0] x);
    longint v, p;
    v = (cfg.relu && x < 0) ? 0 : longint'(x);
    p = v * longint'(cfg.mult);
    if (cfg.shift != 0) p = p + (longint'(1) <<< (cfg.shift - 1));
    p = (p >>> cfg.shift) + longint'(cfg.zp);
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return p[7:0];
  endfunction

  task automatic run(int tiles, int gaps, output int cycles);
    int sent, got;
    sent = 0; got = 0; cycles = 0;
    exp_q.delete();
    @(negedge clk);
    while (got < tiles && cycles < 10000) begin
      logic fin;
      if (!in_valid && sent < tiles) begin
        logic [511:0] e;
        for (int i = 0; i < 64; i++) begin
          in_data[i*32 +: 32] = (i % 4 == 0) ? $urandom : 32'($signed($urandom_range(0, 4000)) - 2000);
          e[i*8 +: 8] = qref(in_data[i*32 +: 32]);
        end
        exp_q.push_back(e);
        in_valid = (gaps == 0) || ($urandom_range(0, 1) == 1);
        if (!in_valid) void'(exp_q.pop_back());
      end
      out_ready = (gaps == 0) || ($urandom_range(0, 2) != 0);
      #1;
      fin = in_valid && in_ready;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== exp_q[got]) begin
          failures++;
          if (failures < 3) $display("tile %0d got %h exp %h", got, out_data, exp_q[got]);
        end
        got++;
      end
      @(negedge clk);
      if (fin) begin in_valid = 0; sent++; end
      cycles++;
    end
    in_valid = 0;
    checks++;
    if (got != tiles) failures++;
  endtask

  initial begin
    int cyc;
    in_valid = 0; out_ready = 0; in_data = '0;
    cfg = '{mult: 32'sd3, shift: 6'd4, zp: 8'sd0, relu: 1'b0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(6, 0, cyc);
    $display("6 tiles in %0d cycles", cyc);
    checks++;
    if (cyc > 6*8 + 3) failures++;
    for (int r = 0; r < 20; r++) begin
      cfg.mult  = $signed($urandom_range(0, 2000)) - 1000;
      cfg.shift = 6'($urandom_range(0, 20));
      cfg.zp    = 8'($urandom);
      cfg.relu  = 1'($urandom);
      run(3, 1, cyc);
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
