// tb_data_reshuffler: runs the reshuffler in copy, transpose and maxpool
// mode with random gaps and back-pressure, comparing every output beat with a
// software model (maxpool: element-wise max over each window of consecutive
// 64-bit vectors, eight pooled vectors packed per output beat).
module tb_data_reshuffler;
  import voltra_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  reshuf_cfg_t cfg;
  logic [511:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;
  logic [511:0] exp_q[$];

  always #5 clk = ~clk;

  data_reshuffler dut (.clk, .rst_n, .start, .cfg, .in_data, .in_valid, .in_ready,
                       .out_data, .out_valid, .out_ready);

  function automatic logic [511:0] tr(logic [511:0] x);
    logic [511:0] y;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) y[(r*8+c)*8 +: 8] = x[(c*8+r)*8 +: 8];
    return y;
  endfunction

  task automatic run(rs_mode_e mode, int W, int in_beats);
    int sent, got, cyc, exp_out, vec_i, pk;
    logic [63:0] acc;
    logic [511:0] pack;
    cfg.mode = mode; cfg.window = 16'(W);
    exp_q.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // build the expected output
    exp_out = (mode == RS_MAXPOOL) ? (in_beats * 8 / W) / 8 : in_beats;
    sent = 0; got = 0; cyc = 0; vec_i = 0; pk = 0;
    while (got < exp_out && cyc < 5000) begin
      logic fin;
      if (!in_valid && sent < in_beats) begin
        for (int i = 0; i < 16; i++) in_data[i*32 +: 32] = $urandom;
        in_valid = ($urandom_range(0, 3) != 0);
      end
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      fin = in_valid && in_ready;
      if (fin) begin
        if (mode == RS_MAXPOOL) begin
          for (int v = 0; v < 8; v++) begin
            for (int l = 0; l < 8; l++)
              if (vec_i == 0 || $signed(in_data[v*64 + l*8 +: 8]) > $signed(acc[l*8 +: 8]))
                acc[l*8 +: 8] = in_data[v*64 + l*8 +: 8];
            vec_i++;
            if (vec_i == W) begin
              vec_i = 0;
              pack[pk*64 +: 64] = acc;
              pk++;
              if (pk == 8) begin exp_q.push_back(pack); pk = 0; end
            end
          end
        end else begin
          exp_q.push_back(mode == RS_TRANSPOSE ? tr(in_data) : in_data);
        end
      end
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
          failures++;
          if (failures < 3) $display("mode %0d beat %0d mismatch", mode, got);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
        got++;
      end
      @(negedge clk);
      if (fin) begin in_valid = 0; sent++; end
      cyc++;
    end
    in_valid = 0; out_ready = 0;
    checks++;
    if (got != exp_out) begin failures++; $display("mode %0d: %0d of %0d beats", mode, got, exp_out); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; cfg = '{mode: RS_COPY, window: 16'd1};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(RS_COPY, 0, 10);
    run(RS_TRANSPOSE, 0, 10);
    run(RS_MAXPOOL, 4, 8);    // 64 vectors -> 16 pooled -> 2 beats
    run(RS_MAXPOOL, 9, 18);   // 144 vectors -> 16 pooled -> 2 beats
    run(RS_MAXPOOL, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
