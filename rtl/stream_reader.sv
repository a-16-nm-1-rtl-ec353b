// stream_reader: read data streamer with mixed-grained prefetching.
//
// An AGU produces one temporal address per output beat. The address is copied,
// plus c*ch_stride, into the address queue of each of the NUM_CH access
// channels, so channel c fetches a word at AGU + c*ch_stride (with ch_stride
// set to the row pitch, eight rows of a feature map are gathered at once;
// this is what makes strided im2col access possible). Each channel owns a
// memory interface controller (MIC) and a DEPTH-deep data FIFO. A channel
// issues its next request as soon as its FIFO, counting the request in
// flight, has room; channels run ahead of each other independently, so a
// channel that lost a bank conflict catches up from its queue while the
// others keep prefetching. A channel is WORDS x 64 bits wide: its WORDS
// sub-requests go to consecutive banks (WORDS = 8 reads a whole super bank).
// The output beat is the concatenation of all channel FIFO heads (channel 0
// in the low bits) and is valid when every FIFO holds data.
//
// Timing: a request is presented the cycle its address leaves the queue,
// data return one cycle after the grant, and an uncontended channel sustains
// one beat per cycle. Channel widths, FIFO depths and AGU dimensions follow
// the paper; the channel-stride scheme, the address queues and the exact
// issue rule are this design's choices.
module stream_reader
  import voltra_pkg::*;
#(
  parameter int unsigned NUM_CH = 8,
  parameter int unsigned WORDS  = 1,
  parameter int unsigned DEPTH  = 8,
  parameter int unsigned DIMS   = 6
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  stream_cfg_t                        cfg,
  output mem_req_t [NUM_CH*WORDS-1:0]        mem_req,
  input  mem_rsp_t [NUM_CH*WORDS-1:0]        mem_rsp,
  output logic [NUM_CH*WORDS*WORD_W-1:0]     out_data,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic                               busy
);
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned BEAT_W = WORDS*WORD_W;

  addr_t             a_addr;
  logic              a_valid, a_ready, a_busy;
  addr_t             ch_stride_q;
  logic [NUM_CH-1:0] aq_ready, aq_valid, df_valid, ch_busy, aq_nonempty;
  logic              pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ch_stride_q <= '0;
    else if (start) ch_stride_q <= cfg.ch_stride;
  end

  agu #(.DIMS(DIMS)) u_agu (
    .clk, .rst_n, .start, .cfg(cfg.agu),
    .addr(a_addr), .valid(a_valid), .ready(a_ready), .busy(a_busy)
  );

  assign a_ready   = &aq_ready;
  assign out_valid = &df_valid;
  assign pop       = out_valid && out_ready;
  assign busy      = a_busy || (|ch_busy) || (|aq_nonempty) || (|df_valid);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    addr_t            aq_head;
    logic [CW-1:0]    aq_count, df_count;
    logic             busy_q;
    addr_t            addr_q;
    logic [WORDS-1:0] req_pend_q, data_pend_q;
    word_t [WORDS-1:0] coll_q, merged;
    logic             idle_like, fresh, space_ok, complete;
    logic [WORDS-1:0] gnt, rvalid;

    sync_fifo #(.WIDTH(ADDR_W), .DEPTH(DEPTH)) u_aq (
      .clk, .rst_n,
      .push_valid(a_valid && a_ready), .push_ready(aq_ready[c]),
      .push_data(a_addr + addr_t'(c) * ch_stride_q),
      .pop_valid(aq_valid[c]), .pop_ready(fresh), .pop_data(aq_head),
      .count(aq_count)
    );
    assign aq_nonempty[c] = aq_valid[c];

    always_comb begin
      for (int j = 0; j < WORDS; j++) begin
        gnt[j]    = mem_rsp[c*WORDS+j].gnt;
        rvalid[j] = mem_rsp[c*WORDS+j].rvalid;
        merged[j] = rvalid[j] ? mem_rsp[c*WORDS+j].rdata : coll_q[j];
      end
    end

    // a channel with no sub-request left waiting completes in this cycle
    assign idle_like = !busy_q || (req_pend_q == '0);
    assign complete  = busy_q && (req_pend_q == '0);
    assign space_ok  = (32'(df_count) - 32'(pop) + 32'(busy_q) + 1) <= DEPTH;
    assign fresh     = idle_like && aq_valid[c] && space_ok;
    assign ch_busy[c] = busy_q;

    always_comb begin
      for (int j = 0; j < WORDS; j++) begin
        mem_req[c*WORDS+j].we    = 1'b0;
        mem_req[c*WORDS+j].wdata = '0;
        if (!idle_like) begin
          mem_req[c*WORDS+j].req  = req_pend_q[j];
          mem_req[c*WORDS+j].addr = addr_q + addr_t'(8*j);
        end else begin
          mem_req[c*WORDS+j].req  = fresh;
          mem_req[c*WORDS+j].addr = aq_head + addr_t'(8*j);
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy_q      <= 1'b0;
        addr_q      <= '0;
        req_pend_q  <= '0;
        data_pend_q <= '0;
        coll_q      <= '0;
      end else if (!idle_like) begin
        req_pend_q  <= req_pend_q & ~gnt;
        data_pend_q <= (data_pend_q & ~rvalid) | (req_pend_q & gnt);
        coll_q      <= merged;
      end else if (fresh) begin
        busy_q      <= 1'b1;
        addr_q      <= aq_head;
        req_pend_q  <= ~gnt;
        data_pend_q <= gnt;
      end else begin
        busy_q      <= 1'b0;
        data_pend_q <= '0;
      end
    end

    sync_fifo #(.WIDTH(BEAT_W), .DEPTH(DEPTH)) u_df (
      .clk, .rst_n,
      .push_valid(complete), .push_ready(),
      .push_data(merged),
      .pop_valid(df_valid[c]), .pop_ready(pop),
      .pop_data(out_data[c*BEAT_W +: BEAT_W]),
      .count(df_count)
    );

    // the issue rule reserves a FIFO slot for every request in flight
    assert property (@(posedge clk) disable iff (!rst_n)
                     complete |-> (32'(df_count) - 32'(pop) < DEPTH))
      else $error("stream_reader: data FIFO overflow on channel %0d", c);
  end
endmodule
