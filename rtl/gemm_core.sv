// gemm_core: 8x8x8 output-stationary GEMM array with its hardware loop
// controller.
//
// Sixty-four dot-product units are laid out as an 8x8 grid. Row m of the A
// tile (8 int8 values, byte m*8+k) is broadcast along grid row m, column n of
// the B tile (byte n*8+k) along grid column n, so one cycle performs
// 8x8x8 = 512 multiply-accumulates. Each grid point owns a 32-bit
// accumulator that stays in place over the K loop (output stationary).
//
// The loop controller walks m_tiles x n_tiles output tiles, k innermost. At
// k = 0 it starts the accumulators from zero, or from a partial-sum tile when
// psum_en is set; after the last k it moves the 64 results (word m*8+n of
// d_data) into an output register and carries on with the next tile while
// the result waits to be taken. One k step per cycle, stalling only when an
// operand stream is empty or the output register is still full at the end of
// a tile. The array shape, accumulation precision, output-stationary dataflow
// and clearing by the loop controller follow the paper; the operand byte
// order and valid/ready streams are this design's choices.
module gemm_core
  import voltra_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  gemm_cfg_t       cfg,
  input  logic [A_W-1:0]  a_data,
  input  logic            a_valid,
  output logic            a_ready,
  input  logic [B_W-1:0]  b_data,
  input  logic            b_valid,
  output logic            b_ready,
  input  logic [C_W-1:0]  c_data,
  input  logic            c_valid,
  output logic            c_ready,
  output logic [C_W-1:0]  d_data,
  output logic            d_valid,
  input  logic            d_ready,
  output logic            busy,
  output logic            stall
);
  gemm_cfg_t   cfg_q;
  logic        active_q;
  logic [15:0] m_q, n_q, k_q;
  logic signed [MU*NU-1:0][ACC_W-1:0] acc_q, acc_nxt, dots;
  logic        last_k, last_n, last_m, need_c, step, d_valid_q;

  for (genvar m = 0; m < MU; m++) begin : g_row
    for (genvar n = 0; n < NU; n++) begin : g_col
      dotprod_unit #(.K(KU)) u_dp (
        .a  (a_data[m*KU*8 +: KU*8]),
        .b  (b_data[n*KU*8 +: KU*8]),
        .dot(dots[m*NU+n])
      );
    end
  end

  assign last_k = (k_q + 1'b1 >= cfg_q.k_tiles);
  assign last_n = (n_q + 1'b1 >= cfg_q.n_tiles);
  assign last_m = (m_q + 1'b1 >= cfg_q.m_tiles);
  assign need_c = cfg_q.psum_en && (k_q == '0);

  assign step    = active_q && a_valid && b_valid && (!need_c || c_valid) &&
                   (!last_k || !d_valid_q || d_ready);
  assign a_ready = step;
  assign b_ready = step;
  assign c_ready = step && need_c;
  assign stall   = active_q && !step;

  always_comb begin
    for (int i = 0; i < MU*NU; i++) begin
      if (k_q == '0) acc_nxt[i] = (cfg_q.psum_en ? c_data[i*ACC_W +: ACC_W] : '0) + dots[i];
      else           acc_nxt[i] = acc_q[i] + dots[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q     <= '0;
      active_q  <= 1'b0;
      m_q       <= '0;
      n_q       <= '0;
      k_q       <= '0;
      acc_q     <= '0;
      d_data    <= '0;
      d_valid_q <= 1'b0;
    end else begin
      if (d_valid_q && d_ready) d_valid_q <= 1'b0;
      if (start) begin
        cfg_q    <= cfg;
        active_q <= (cfg.m_tiles != 0) && (cfg.n_tiles != 0) && (cfg.k_tiles != 0);
        m_q      <= '0;
        n_q      <= '0;
        k_q      <= '0;
      end else if (step) begin
        acc_q <= acc_nxt;
        if (last_k) begin
          d_data    <= acc_nxt;
          d_valid_q <= 1'b1;
          k_q       <= '0;
          if (last_n) begin
            n_q <= '0;
            if (last_m) active_q <= 1'b0;
            else        m_q <= m_q + 1'b1;
          end else begin
            n_q <= n_q + 1'b1;
          end
        end else begin
          k_q <= k_q + 1'b1;
        end
      end
    end
  end

  assign d_valid = d_valid_q;
  assign busy    = active_q || d_valid_q;
endmodule
