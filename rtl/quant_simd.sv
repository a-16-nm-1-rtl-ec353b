// quant_simd: time-multiplexed quantization SIMD unit.
//
// Accepts one 8x8 tile of 32-bit GEMM results (2048 bits, word m*8+n) and
// quantizes it with only eight quant_pe lanes: a hardware loop counter feeds
// row r = 0..7 of the tile to the lanes in cycle r, and the eight 8-bit
// results of each row are gathered until the whole 64-byte tile (byte m*8+n)
// is presented on the 512-bit output. A tile takes eight cycles; the next
// tile is accepted in the cycle the current one finishes, so back-to-back
// tiles flow at one per eight cycles. Eight lanes and 64 results in eight
// cycles follow the paper; the quantization formula is in quant_pe.
module quant_simd
  import voltra_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  simd_cfg_t       cfg,
  input  logic [C_W-1:0]  in_data,
  input  logic            in_valid,
  output logic            in_ready,
  output logic [511:0]    out_data,
  output logic            out_valid,
  input  logic            out_ready
);
  localparam int unsigned ROUNDS = (MU*NU) / LANES;
  localparam int unsigned RW     = $clog2(ROUNDS);

  logic [C_W-1:0]            in_q;
  logic [RW-1:0]             cnt_q;
  logic                      active_q, finish;
  logic [511:0]              buf_q, buf_nxt;
  logic signed [LANES-1:0][7:0] y;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    quant_pe u_pe (
      .x  (in_q[(int'(cnt_q)*LANES + l)*32 +: 32]),
      .cfg(cfg),
      .y  (y[l])
    );
  end

  always_comb begin
    buf_nxt = buf_q;
    buf_nxt[int'(cnt_q)*LANES*8 +: LANES*8] = y;
  end

  assign finish   = active_q && (cnt_q == RW'(ROUNDS-1)) && (!out_valid || out_ready);
  assign in_ready = !active_q || finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_q      <= '0;
      cnt_q     <= '0;
      active_q  <= 1'b0;
      buf_q     <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (active_q && cnt_q != RW'(ROUNDS-1)) begin
        buf_q <= buf_nxt;
        cnt_q <= cnt_q + 1'b1;
      end
      if (finish) begin
        out_data  <= buf_nxt;
        out_valid <= 1'b1;
        active_q  <= 1'b0;
        cnt_q     <= '0;
      end
      if (in_valid && in_ready) begin
        in_q     <= in_data;
        active_q <= 1'b1;
        cnt_q    <= '0;
      end
    end
  end
endmodule
