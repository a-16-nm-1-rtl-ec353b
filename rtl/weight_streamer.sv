// weight_streamer: coarse-grained read streamer for the GEMM weight operand.
//
// A 3-D AGU drives a single 512-bit access channel that reads one whole super
// bank (eight consecutive 64-bit banks) per address, backed by an eight-deep
// FIFO. The 8x8 byte transposer on its output is enabled by the transpose bit
// of the configuration, captured at start. Widths, depth, AGU dimensions and
// the transposer follow the paper. Timing is that of stream_reader: one beat
// per cycle when the super bank is uncontended.
module weight_streamer
  import voltra_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned DIMS  = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  stream_cfg_t        cfg,
  output mem_req_t [7:0]     mem_req,
  input  mem_rsp_t [7:0]     mem_rsp,
  output logic [511:0]       out_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic               busy
);
  logic [511:0] raw;
  logic         tr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     tr_q <= 1'b0;
    else if (start) tr_q <= cfg.transpose;
  end

  stream_reader #(.NUM_CH(1), .WORDS(8), .DEPTH(DEPTH), .DIMS(DIMS)) u_rd (
    .clk, .rst_n, .start, .cfg, .mem_req, .mem_rsp,
    .out_data(raw), .out_valid, .out_ready, .busy
  );

  transposer #(.N(8)) u_tr (.en(tr_q), .in_data(raw), .out_data(out_data));
endmodule
