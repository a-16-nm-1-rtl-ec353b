// quant_pe: one lane of the quantization SIMD unit.
//
// Turns a 32-bit accumulator value into an 8-bit result in one combinational
// step: optional ReLU, multiply by a signed 32-bit scale, rounding arithmetic
// right shift, add the zero point, saturate to [-128, 127]:
//   y = sat8(((relu ? max(x,0) : x) * mult + 2^(shift-1)) >>> shift + zp)
// (no rounding term when shift = 0). The paper says the lanes perform
// "quantization and activation" but not the formula; this one is the usual
// fixed-point requantization.
module quant_pe
  import voltra_pkg::*;
(
  input  logic signed [31:0] x,
  input  simd_cfg_t          cfg,
  output logic signed [7:0]  y
);
  logic signed [31:0] v;
  logic signed [63:0] p, r;
  logic signed [63:0] rnd;
  always_comb begin
    v   = (cfg.relu && x < 0) ? 32'sd0 : x;
    rnd = (cfg.shift == 0) ? 64'sd0 : (64'sd1 <<< (cfg.shift - 1'b1));
    p   = 64'(v) * 64'(cfg.mult) + rnd;
    r   = (p >>> cfg.shift) + 64'(cfg.zp);
    if (r > 64'sd127)       y = 8'sd127;
    else if (r < -64'sd128) y = -8'sd128;
    else                    y = r[7:0];
  end
endmodule
