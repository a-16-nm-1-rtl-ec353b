// csr_manager: configuration and status registers written by the control core.
//
// A flat file of 128 32-bit registers, addressed by an 8-bit register index,
// written with csr_we/csr_addr/csr_wdata and read back combinationally on
// csr_rdata. The register contents are decoded into the configuration structs
// of the seven streamers, the GEMM core, the quantization SIMD unit and the
// reshuffler (map in voltra_pkg). Writing CSR_START raises, for one cycle,
// the start bit of every unit whose bit is set in the written value; reading
// CSR_BUSY returns the units' busy flags. The paper says the control core
// programs base pointers, bounds, strides and matrix sizes through CSRs; the
// map and this write/read port are this design's choices.
module csr_manager
  import voltra_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         csr_we,
  input  logic [7:0]                   csr_addr,
  input  logic [31:0]                  csr_wdata,
  output logic [31:0]                  csr_rdata,
  input  logic [NUM_UNITS-1:0]         unit_busy,
  output stream_cfg_t [NUM_ST-1:0]     st_cfg,
  output gemm_cfg_t                    gemm_cfg,
  output simd_cfg_t                    simd_cfg,
  output reshuf_cfg_t                  rs_cfg,
  output logic [NUM_UNITS-1:0]         start
);
  logic [31:0] regs_q [128];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 128; i++) regs_q[i] <= '0;
      start <= '0;
    end else begin
      start <= '0;
      if (csr_we) begin
        if (csr_addr == CSR_START) start <= csr_wdata[NUM_UNITS-1:0];
        else if (csr_addr < 8'd128) regs_q[csr_addr[6:0]] <= csr_wdata;
      end
    end
  end

  always_comb begin
    if (csr_addr == CSR_BUSY) csr_rdata = 32'(unit_busy);
    else                      csr_rdata = regs_q[csr_addr[6:0]];
  end

  always_comb begin
    for (int s = 0; s < NUM_ST; s++) begin
      st_cfg[s].agu.base = regs_q[16*s][ADDR_W-1:0];
      for (int d = 0; d < MAX_DIMS; d++) begin
        st_cfg[s].agu.bound[d]  = regs_q[16*s+1+d][BOUND_W-1:0];
        st_cfg[s].agu.stride[d] = regs_q[16*s+7+d][ADDR_W-1:0];
      end
      st_cfg[s].ch_stride = regs_q[16*s+13][ADDR_W-1:0];
      st_cfg[s].transpose = regs_q[16*s+14][0];
    end
    gemm_cfg.m_tiles  = regs_q[CSR_GEMM_M[6:0]][15:0];
    gemm_cfg.n_tiles  = regs_q[CSR_GEMM_N[6:0]][15:0];
    gemm_cfg.k_tiles  = regs_q[CSR_GEMM_K[6:0]][15:0];
    gemm_cfg.psum_en  = regs_q[CSR_GEMM_FLAGS[6:0]][0];
    gemm_cfg.quant_en = regs_q[CSR_GEMM_FLAGS[6:0]][1];
    simd_cfg.mult     = regs_q[CSR_SIMD_MULT[6:0]];
    simd_cfg.shift    = regs_q[CSR_SIMD_SHIFT[6:0]][5:0];
    simd_cfg.zp       = regs_q[CSR_SIMD_ZP[6:0]][7:0];
    simd_cfg.relu     = regs_q[CSR_SIMD_RELU[6:0]][0];
    rs_cfg.mode       = rs_mode_e'(regs_q[CSR_RS_MODE[6:0]][1:0]);
    rs_cfg.window     = regs_q[CSR_RS_WINDOW[6:0]][15:0];
  end
endmodule
