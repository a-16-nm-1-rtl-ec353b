// psum_out_streamer: time-multiplexed partial-sum and output streamers.
//
// A 2048-bit read streamer (partial sums into the GEMM core) and a 2048-bit
// write streamer (results out of it), each with a one-deep FIFO, share one
// group of 32 crossbar ports, which halves the crossbar ports they would need
// on their own. Whenever the psum reader has any request pending, the whole
// port group is its; the output writer gets the ports only in cycles the
// reader leaves them free. Outputs can wait because a tile's result appears
// only after its partial sums were consumed. out_deferred is high in a cycle
// in which the writer wanted the ports but lost them to the reader. The
// sharing, the psum priority and the depths follow the paper; the
// all-or-nothing port mux is this design's choice. A 2048-bit beat is 32
// consecutive words, one word in each bank.
module psum_out_streamer
  import voltra_pkg::*;
#(
  parameter int unsigned DEPTH = 1,
  parameter int unsigned DIMS  = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 psum_start,
  input  stream_cfg_t          psum_cfg,
  input  logic                 out_start,
  input  stream_cfg_t          out_cfg,
  output logic [C_W-1:0]       psum_data,
  output logic                 psum_valid,
  input  logic                 psum_ready,
  input  logic [C_W-1:0]       out_data,
  input  logic                 out_valid,
  output logic                 out_ready,
  output mem_req_t [31:0]      mem_req,
  input  mem_rsp_t [31:0]      mem_rsp,
  output logic                 psum_busy,
  output logic                 out_busy,
  output logic                 out_deferred
);
  mem_req_t [31:0] rd_req, wr_req;
  mem_rsp_t [31:0] rd_rsp, wr_rsp;
  logic rd_sel, wr_want;

  stream_reader #(.NUM_CH(1), .WORDS(32), .DEPTH(DEPTH), .DIMS(DIMS)) u_psum (
    .clk, .rst_n, .start(psum_start), .cfg(psum_cfg),
    .mem_req(rd_req), .mem_rsp(rd_rsp),
    .out_data(psum_data), .out_valid(psum_valid), .out_ready(psum_ready), .busy(psum_busy)
  );

  stream_writer #(.NUM_CH(1), .WORDS(32), .DEPTH(DEPTH), .DIMS(DIMS)) u_out (
    .clk, .rst_n, .start(out_start), .cfg(out_cfg),
    .in_data(out_data), .in_valid(out_valid), .in_ready(out_ready),
    .mem_req(wr_req), .mem_rsp(wr_rsp), .busy(out_busy)
  );

  always_comb begin
    rd_sel  = 1'b0;
    wr_want = 1'b0;
    for (int i = 0; i < 32; i++) begin
      rd_sel  |= rd_req[i].req;
      wr_want |= wr_req[i].req;
    end
    for (int i = 0; i < 32; i++) begin
      mem_req[i]       = rd_sel ? rd_req[i] : wr_req[i];
      rd_rsp[i]        = mem_rsp[i];
      rd_rsp[i].gnt    = rd_sel && mem_rsp[i].gnt;
      wr_rsp[i]        = mem_rsp[i];
      wr_rsp[i].gnt    = !rd_sel && mem_rsp[i].gnt;
      wr_rsp[i].rvalid = 1'b0;
    end
  end
  assign out_deferred = rd_sel && wr_want;
endmodule
