// stream_writer: write data streamer.
//
// Each accepted input beat is split into NUM_CH channels of WORDS x 64 bits.
// The AGU supplies one temporal address per beat; channel c writes its part
// at AGU + c*ch_stride, its WORDS words to consecutive banks. A beat is
// accepted when the AGU has an address and every channel FIFO has room; each
// channel then drains its FIFO on its own, raising one request per word still
// unwritten and retiring the entry once all of its words have been granted.
// in_ready drops when the programmed address sequence is exhausted. The paper
// names the write streamers (Q_Out, output, reshuffler Out) without giving
// their insides; this one mirrors the read streamer.
module stream_writer
  import voltra_pkg::*;
#(
  parameter int unsigned NUM_CH = 8,
  parameter int unsigned WORDS  = 1,
  parameter int unsigned DEPTH  = 2,
  parameter int unsigned DIMS   = 3
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  stream_cfg_t                        cfg,
  input  logic [NUM_CH*WORDS*WORD_W-1:0]     in_data,
  input  logic                               in_valid,
  output logic                               in_ready,
  output mem_req_t [NUM_CH*WORDS-1:0]        mem_req,
  input  mem_rsp_t [NUM_CH*WORDS-1:0]        mem_rsp,
  output logic                               busy
);
  localparam int unsigned BEAT_W = WORDS*WORD_W;
  localparam int unsigned ENT_W  = ADDR_W + BEAT_W;

  addr_t             a_addr, ch_stride_q;
  logic              a_valid, a_busy, accept;
  logic [NUM_CH-1:0] f_ready, f_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ch_stride_q <= '0;
    else if (start) ch_stride_q <= cfg.ch_stride;
  end

  agu #(.DIMS(DIMS)) u_agu (
    .clk, .rst_n, .start, .cfg(cfg.agu),
    .addr(a_addr), .valid(a_valid), .ready(accept), .busy(a_busy)
  );

  assign in_ready = a_valid && (&f_ready);
  assign accept   = in_valid && in_ready;
  assign busy     = a_busy || (|f_valid);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [ENT_W-1:0] head;
    logic [WORDS-1:0] sent_q, gnt;
    logic             done;

    sync_fifo #(.WIDTH(ENT_W), .DEPTH(DEPTH)) u_f (
      .clk, .rst_n,
      .push_valid(accept), .push_ready(f_ready[c]),
      .push_data({a_addr + addr_t'(c) * ch_stride_q, in_data[c*BEAT_W +: BEAT_W]}),
      .pop_valid(f_valid[c]), .pop_ready(done), .pop_data(head),
      .count()
    );

    always_comb begin
      for (int j = 0; j < WORDS; j++) begin
        gnt[j] = mem_rsp[c*WORDS+j].gnt;
        mem_req[c*WORDS+j].req   = f_valid[c] && !sent_q[j];
        mem_req[c*WORDS+j].we    = 1'b1;
        mem_req[c*WORDS+j].addr  = head[BEAT_W +: ADDR_W] + addr_t'(8*j);
        mem_req[c*WORDS+j].wdata = head[j*WORD_W +: WORD_W];
      end
    end
    assign done = f_valid[c] && (&(sent_q | gnt));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    sent_q <= '0;
      else if (done) sent_q <= '0;
      else if (f_valid[c]) sent_q <= sent_q | gnt;
    end
  end
endmodule
