// tb_transposer: checks the 8x8 byte transpose and the pass-through mode.
module tb_transposer;
  logic en;
  logic [511:0] din, dout;
  int checks = 0, failures = 0;

  transposer #(.N(8)) dut (.en, .in_data(din), .out_data(dout));

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 16; i++) din[i*32 +: 32] = $urandom;
      en = t[0];
      #1;
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) begin
          checks++;
          if (dout[(r*8+c)*8 +: 8] !== (en ? din[(c*8+r)*8 +: 8] : din[(r*8+c)*8 +: 8])) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
