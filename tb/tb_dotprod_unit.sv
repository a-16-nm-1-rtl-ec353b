// tb_dotprod_unit: checks the 8-element int8 dot product against a software
// sum over random and extreme vectors.
module tb_dotprod_unit;
  logic [63:0] a, b;
  logic signed [31:0] dot;
  int checks = 0, failures = 0;

  dotprod_unit #(.K(8)) dut (.a, .b, .dot);

  function automatic int ref_dot(logic [63:0] x, logic [63:0] y);
    int s = 0;
    for (int i = 0; i < 8; i++) s += int'(signed'(x[i*8 +: 8])) * int'(signed'(y[i*8 +: 8]));
    return s;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      if (t == 0)      begin a = {8{8'h80}}; b = {8{8'h80}}; end   // -128*-128*8
      else if (t == 1) begin a = {8{8'h80}}; b = {8{8'h7f}}; end
      else begin a = {$urandom, $urandom}; b = {$urandom, $urandom}; end
      #1;
      checks++;
      if (dot !== ref_dot(a, b)) begin
        failures++;
        if (failures < 5) $display("mismatch a=%h b=%h dot=%0d ref=%0d", a, b, dot, ref_dot(a, b));
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
