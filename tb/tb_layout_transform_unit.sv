// tb_layout_transform_unit: random 512-bit beats through the layout stage in
// copy and transpose mode under random back-pressure; checks order, content
// and one beat per cycle when both sides are always ready.
module tb_layout_transform_unit;
  logic clk = 0, rst_n = 0, transpose = 0;
  logic [511:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;
  logic [511:0] exp_q[$];

  always #5 clk = ~clk;

  layout_transform_unit dut (.clk, .rst_n, .transpose, .in_data, .in_valid, .in_ready,
                             .out_data, .out_valid, .out_ready);

  function automatic logic [511:0] tr(logic [511:0] x);
    logic [511:0] y;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) y[(r*8+c)*8 +: 8] = x[(c*8+r)*8 +: 8];
    return y;
  endfunction

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int sent, got, cyc;
      transpose = r[0];
      sent = 0; got = 0; cyc = 0;
      @(negedge clk);
      while (got < 20 && cyc < 2000) begin
        logic fin;
        if (!in_valid && sent < 20) begin
          for (int i = 0; i < 16; i++) in_data[i*32 +: 32] = $urandom;
          in_valid = (r < 2) || ($urandom_range(0, 2) != 0);
        end
        out_ready = (r < 2) || ($urandom_range(0, 2) != 0);
        #1;
        fin = in_valid && in_ready;
        if (fin) exp_q.push_back(transpose ? tr(in_data) : in_data);
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
      in_valid = 0;
      checks++;
      if (got != 20) failures++;
      if (r < 2) begin
        checks++;
        if (cyc > 22) begin failures++; $display("20 beats took %0d cycles", cyc); end
      end
    end
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
