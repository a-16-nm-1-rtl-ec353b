// tb_maxpool_unit: streams random int8 vectors through the eight-lane maxpool
// unit for several window sizes and checks each pooled vector against a
// software maximum per lane.
module tb_maxpool_unit;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] window;
  logic [63:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;
  logic [63:0] exp_q[$];

  always #5 clk = ~clk;

  maxpool_unit #(.LANES(8)) dut (.clk, .rst_n, .start, .window, .in_data, .in_valid, .in_ready,
                                 .out_data, .out_valid, .out_ready);

  initial begin
    in_valid = 0; out_ready = 0; window = 1; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      int W, outs, got, sent, idx, cyc;
      logic [63:0] acc;
      W = (r == 0) ? 1 : $urandom_range(2, 9);
      window = 16'(W);
      outs = 5;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      exp_q.delete();
      got = 0; sent = 0; idx = 0; cyc = 0;
      while (got < outs && cyc < 5000) begin
        logic fin;
        if (!in_valid && sent < outs*W) begin
          in_data = {$urandom, $urandom};
          in_valid = ($urandom_range(0, 3) != 0);
        end
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
        fin = in_valid && in_ready;
        if (fin) begin
          for (int l = 0; l < 8; l++)
            if (idx == 0 || $signed(in_data[l*8 +: 8]) > $signed(acc[l*8 +: 8])) acc[l*8 +: 8] = in_data[l*8 +: 8];
          idx++;
          if (idx == W) begin exp_q.push_back(acc); idx = 0; end
        end
        if (out_valid && out_ready) begin
          checks++;
          if (exp_q.size() == 0 || out_data !== exp_q[0]) failures++;
          if (exp_q.size() != 0) void'(exp_q.pop_front());
          got++;
        end
        @(negedge clk);
        if (fin) begin in_valid = 0; sent++; end
        cyc++;
      end
      in_valid = 0; out_ready = 0;
      checks++;
      if (got != outs) failures++;
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
