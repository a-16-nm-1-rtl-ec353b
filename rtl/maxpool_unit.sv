// maxpool_unit: eight-lane sequential max-pooling.
//
// Each 64-bit input vector holds eight signed 8-bit values, one per lane
// (eight channels of one pixel in a channel-blocked layout). The lanes keep a
// running element-wise maximum over `window` consecutive vectors and then
// emit it as one output vector, so any window size is handled by streaming its
// elements in one per cycle. start clears a partly filled window. A window of
// 0 counts as 1. Eight lanes and the sequential, arbitrary-size window follow
// the paper; the vector format and handshake are this design's choices.
module maxpool_unit #(
  parameter int unsigned LANES = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [15:0]         window,
  input  logic [LANES*8-1:0]  in_data,
  input  logic                in_valid,
  output logic                in_ready,
  output logic [LANES*8-1:0]  out_data,
  output logic                out_valid,
  input  logic                out_ready
);
  logic [15:0]          cnt_q;
  logic [LANES*8-1:0]   max_q, m;
  logic                 last;

  assign in_ready = !out_valid || out_ready;
  assign last     = (cnt_q + 1'b1 >= window);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (cnt_q == '0 || signed'(in_data[l*8 +: 8]) > signed'(max_q[l*8 +: 8]))
        m[l*8 +: 8] = in_data[l*8 +: 8];
      else
        m[l*8 +: 8] = max_q[l*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      max_q     <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else if (start) begin
      cnt_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (last) begin
          out_data  <= m;
          out_valid <= 1'b1;
          cnt_q     <= '0;
        end else begin
          max_q <= m;
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
