// agu: multi-dimensional affine address generator.
//
// After a start pulse it walks DIMS nested loops (dimension 0 innermost) and
// presents address = base + sum_d idx_d * stride_d on a valid/ready port, one
// address per accepted cycle. Bounds of 0 or 1 make a loop trivial; strides
// are two's-complement byte offsets. Offsets are kept incrementally (one adder
// per dimension) rather than multiplied. busy stays high until the last
// address has been taken. The paper gives the AGU's programming model (base
// pointer, bounds, strides) and dimensions (6-D input, 3-D weight streamer);
// the loop order and encoding are this design's choices.
module agu
  import voltra_pkg::*;
#(
  parameter int unsigned DIMS = 6
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  agu_cfg_t cfg,
  output addr_t    addr,
  output logic     valid,
  input  logic     ready,
  output logic     busy
);
  agu_cfg_t                        cfg_q;
  logic [DIMS-1:0][BOUND_W-1:0]    idx_q;
  logic [DIMS-1:0][ADDR_W-1:0]     off_q;
  logic                            active_q;
  logic [DIMS-1:0]                 last;   // idx at its final value

  always_comb begin
    addr = cfg_q.base;
    for (int d = 0; d < DIMS; d++) begin
      addr = addr + off_q[d];
      last[d] = (cfg_q.bound[d] <= 1) || (idx_q[d] == cfg_q.bound[d] - 1'b1);
    end
  end

  assign valid = active_q;
  assign busy  = active_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q    <= '0;
      idx_q    <= '0;
      off_q    <= '0;
      active_q <= 1'b0;
    end else if (start) begin
      cfg_q    <= cfg;
      idx_q    <= '0;
      off_q    <= '0;
      active_q <= 1'b1;
    end else if (active_q && ready) begin
      logic carry;
      carry = 1'b1;
      for (int d = 0; d < DIMS; d++) begin
        if (carry) begin
          if (last[d]) begin
            idx_q[d] <= '0;
            off_q[d] <= '0;
          end else begin
            idx_q[d] <= idx_q[d] + 1'b1;
            off_q[d] <= off_q[d] + cfg_q.stride[d];
            carry = 1'b0;
          end
        end
      end
      if (carry) active_q <= 1'b0;   // every dimension wrapped: done
    end
  end
endmodule
