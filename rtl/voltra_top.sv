// voltra_top: the accelerator - GEMM core, quantization SIMD and data
// reshuffler around one shared, 32-bank data memory.
//
// All functional units reach the memory only through their data streamers and
// one fully connected crossbar; the memory is never split into fixed operand
// buffers, so any region can hold inputs, weights, partial sums or outputs,
// and a layer's output becomes the next layer's input just by pointing a
// streamer at it. Crossbar ports (64 bits each):
//    0..7   input streamer      8 x 64-bit channels, 8-deep FIFOs, 6-D AGU
//    8..15  weight streamer     one 512-bit super-bank channel, 8-deep, 3-D AGU
//   16..47  psum/output         2048-bit reader and writer, time-multiplexed
//   48..55  Q_Out streamer      quantized 512-bit results, 8 x 64-bit channels
//   56..63  reshuffler In       8 x 64-bit channels
//   64..71  reshuffler Out      8 x 64-bit channels
//   72..79  DMA                 brought out as dma_req/dma_rsp
// GEMM results go either through the quantization SIMD to the Q_Out streamer
// (quant_en = 1) or as 32-bit values to the output streamer (quant_en = 0).
// The control core and the DMA engine are not part of this RTL: the core's
// CSR accesses enter on csr_*, the DMA's 512-bit memory port on dma_*.
// busy reports the nine units (bit order as the CSR start bits). The blocks
// and their connections follow the paper's architecture figure; port order,
// the CSR map and the result routing bit are this design's choices.
module voltra_top
  import voltra_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   csr_we,
  input  logic [7:0]             csr_addr,
  input  logic [31:0]            csr_wdata,
  output logic [31:0]            csr_rdata,
  input  mem_req_t [7:0]         dma_req,
  output mem_rsp_t [7:0]         dma_rsp,
  output logic [NUM_UNITS-1:0]   busy
);
  localparam int unsigned NPORTS = 80;

  mem_req_t [NPORTS-1:0] req;
  mem_rsp_t [NPORTS-1:0] rsp;

  logic [BANKS-1:0]              bank_req, bank_we;
  logic [BANKS-1:0][BANK_AW-1:0] bank_row;
  word_t [BANKS-1:0]             bank_wdata, bank_rdata;

  stream_cfg_t [NUM_ST-1:0] st_cfg;
  gemm_cfg_t                gemm_cfg;
  simd_cfg_t                simd_cfg;
  reshuf_cfg_t              rs_cfg;
  logic [NUM_UNITS-1:0]     start;

  // ---------------- control ----------------
  csr_manager u_csr (
    .clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .unit_busy(busy), .st_cfg, .gemm_cfg, .simd_cfg, .rs_cfg, .start
  );

  // ---------------- memory ----------------
  mem_xbar #(.NPORTS(NPORTS), .NBANKS(BANKS)) u_xbar (
    .clk, .rst_n, .req_i(req), .rsp_o(rsp),
    .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata
  );

  shared_memory #(.NBANKS(BANKS), .DEPTH(BANK_WORDS)) u_mem (
    .clk, .bank_req, .bank_we, .bank_row, .bank_wdata, .bank_rdata
  );

  assign req[79:72] = dma_req;
  assign dma_rsp    = rsp[79:72];

  // ---------------- GEMM datapath ----------------
  logic [A_W-1:0] a_data;   logic a_valid, a_ready;
  logic [B_W-1:0] b_data;   logic b_valid, b_ready;
  logic [C_W-1:0] c_data;   logic c_valid, c_ready;
  logic [C_W-1:0] d_data;   logic d_valid, d_ready;
  logic           o_ready, s_in_ready;
  logic [511:0]   q_data;   logic q_valid, q_ready;
  logic           gemm_stall, out_deferred;

  stream_reader #(.NUM_CH(8), .WORDS(1), .DEPTH(8), .DIMS(6)) u_input_st (
    .clk, .rst_n, .start(start[ST_INPUT]), .cfg(st_cfg[ST_INPUT]),
    .mem_req(req[7:0]), .mem_rsp(rsp[7:0]),
    .out_data(a_data), .out_valid(a_valid), .out_ready(a_ready), .busy(busy[ST_INPUT])
  );

  weight_streamer #(.DEPTH(8), .DIMS(3)) u_weight_st (
    .clk, .rst_n, .start(start[ST_WEIGHT]), .cfg(st_cfg[ST_WEIGHT]),
    .mem_req(req[15:8]), .mem_rsp(rsp[15:8]),
    .out_data(b_data), .out_valid(b_valid), .out_ready(b_ready), .busy(busy[ST_WEIGHT])
  );

  psum_out_streamer #(.DEPTH(1), .DIMS(3)) u_psum_out_st (
    .clk, .rst_n,
    .psum_start(start[ST_PSUM]), .psum_cfg(st_cfg[ST_PSUM]),
    .out_start(start[ST_OUTPUT]), .out_cfg(st_cfg[ST_OUTPUT]),
    .psum_data(c_data), .psum_valid(c_valid), .psum_ready(c_ready),
    .out_data(d_data), .out_valid(d_valid && !gemm_cfg.quant_en), .out_ready(o_ready),
    .mem_req(req[47:16]), .mem_rsp(rsp[47:16]),
    .psum_busy(busy[ST_PSUM]), .out_busy(busy[ST_OUTPUT]), .out_deferred
  );

  gemm_core u_gemm (
    .clk, .rst_n, .start(start[UNIT_GEMM]), .cfg(gemm_cfg),
    .a_data, .a_valid, .a_ready, .b_data, .b_valid, .b_ready,
    .c_data, .c_valid, .c_ready, .d_data, .d_valid, .d_ready,
    .busy(busy[UNIT_GEMM]), .stall(gemm_stall)
  );

  assign d_ready = gemm_cfg.quant_en ? s_in_ready : o_ready;

  quant_simd #(.LANES(8)) u_simd (
    .clk, .rst_n, .cfg(simd_cfg),
    .in_data(d_data), .in_valid(d_valid && gemm_cfg.quant_en), .in_ready(s_in_ready),
    .out_data(q_data), .out_valid(q_valid), .out_ready(q_ready)
  );

  stream_writer #(.NUM_CH(8), .WORDS(1), .DEPTH(2), .DIMS(3)) u_qout_st (
    .clk, .rst_n, .start(start[ST_QOUT]), .cfg(st_cfg[ST_QOUT]),
    .in_data(q_data), .in_valid(q_valid), .in_ready(q_ready),
    .mem_req(req[55:48]), .mem_rsp(rsp[55:48]), .busy(busy[ST_QOUT])
  );

  // ---------------- data reshuffler ----------------
  logic [511:0] ri_data, ro_data;
  logic         ri_valid, ri_ready, ro_valid, ro_ready;

  stream_reader #(.NUM_CH(8), .WORDS(1), .DEPTH(2), .DIMS(6)) u_rin_st (
    .clk, .rst_n, .start(start[ST_RIN]), .cfg(st_cfg[ST_RIN]),
    .mem_req(req[63:56]), .mem_rsp(rsp[63:56]),
    .out_data(ri_data), .out_valid(ri_valid), .out_ready(ri_ready), .busy(busy[ST_RIN])
  );

  data_reshuffler u_reshuf (
    .clk, .rst_n, .start(start[UNIT_RESHUF]), .cfg(rs_cfg),
    .in_data(ri_data), .in_valid(ri_valid), .in_ready(ri_ready),
    .out_data(ro_data), .out_valid(ro_valid), .out_ready(ro_ready)
  );
  assign busy[UNIT_RESHUF] = ri_valid || ro_valid;

  stream_writer #(.NUM_CH(8), .WORDS(1), .DEPTH(2), .DIMS(6)) u_rout_st (
    .clk, .rst_n, .start(start[ST_ROUT]), .cfg(st_cfg[ST_ROUT]),
    .in_data(ro_data), .in_valid(ro_valid), .in_ready(ro_ready),
    .mem_req(req[71:64]), .mem_rsp(rsp[71:64]), .busy(busy[ST_ROUT])
  );
endmodule
