// dotprod_unit: dot product of two 8-element signed 8-bit vectors.
//
// The eight products are summed in a combinational adder tree (the "spatial
// accumulation" of the 3D array), giving one 32-bit result per cycle with no
// register inside. Element i of a vector is byte i. From the paper: the
// vector length, the int8 operands and the combinational reduction.
module dotprod_unit #(
  parameter int unsigned K = 8
) (
  input  logic [K*8-1:0]      a,
  input  logic [K*8-1:0]      b,
  output logic signed [31:0]  dot
);
  logic signed [K-1:0][31:0] prod;
  always_comb begin
    for (int i = 0; i < K; i++)
      prod[i] = 32'(signed'(a[i*8 +: 8]) * signed'(b[i*8 +: 8]));
  end

  // balanced binary reduction tree
  localparam int unsigned LV = $clog2(K);
  logic signed [LV:0][K-1:0][31:0] t;
  always_comb begin
    t = '0;
    t[0] = prod;
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < (K >> (l+1)); i++)
        t[l+1][i] = t[l][2*i] + t[l][2*i+1];
  end
  assign dot = t[LV][0];
endmodule
