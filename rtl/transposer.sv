// transposer: on-the-fly transpose of an 8x8 matrix of bytes.
//
// The 512-bit beat holds element (r, c) in byte r*8+c. With en high the output
// holds element (c, r) there instead; with en low the beat passes unchanged.
// Purely combinational. It sits at the output of the weight streamer and is
// what lets the GEMM core compute Q*K^T straight from K stored row-major
// (the transposer and its 8x8 size are from the paper; the byte order is this
// design's choice).
module transposer #(
  parameter int unsigned N = 8
) (
  input  logic               en,
  input  logic [N*N*8-1:0]   in_data,
  output logic [N*N*8-1:0]   out_data
);
  always_comb begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        out_data[(r*N+c)*8 +: 8] = en ? in_data[(c*N+r)*8 +: 8] : in_data[(r*N+c)*8 +: 8];
  end
endmodule
