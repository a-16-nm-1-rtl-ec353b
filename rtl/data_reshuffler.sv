// data_reshuffler: the auxiliary data reshuffling block.
//
// Sits between its own read streamer (In St.) and write streamer (Out St.)
// and processes a stream of 512-bit beats in one of three modes:
//   RS_COPY / RS_TRANSPOSE - the beat goes through the layout transform unit
//                            (layout changes come from the streamers' address
//                            patterns, plus an optional 8x8 byte transpose);
//   RS_MAXPOOL             - each beat is unpacked into eight 64-bit vectors
//                            fed one per cycle to the eight-lane maxpool unit;
//                            every `window` vectors give one pooled vector, and
//                            eight pooled vectors are packed into one output
//                            beat (vector 0 in the low bits).
// start clears the maxpool window and the packer. The two units and the
// maxpool's eight lanes are from the paper; the beat/vector packing is this
// design's choice, and in maxpool mode the number of pooled vectors is
// expected to be a multiple of eight.
module data_reshuffler
  import voltra_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  reshuf_cfg_t   cfg,
  input  logic [511:0]  in_data,
  input  logic          in_valid,
  output logic          in_ready,
  output logic [511:0]  out_data,
  output logic          out_valid,
  input  logic          out_ready
);
  logic pool;
  assign pool = (cfg.mode == RS_MAXPOOL);

  // ---- layout path ----
  logic         lt_in_ready, lt_out_valid, lt_out_ready;
  logic [511:0] lt_out_data;

  layout_transform_unit u_lt (
    .clk, .rst_n, .transpose(cfg.mode == RS_TRANSPOSE),
    .in_data, .in_valid(in_valid && !pool), .in_ready(lt_in_ready),
    .out_data(lt_out_data), .out_valid(lt_out_valid), .out_ready(lt_out_ready)
  );

  // ---- maxpool path: unpack -> maxpool -> pack ----
  logic [2:0]   up_q, pk_q;
  logic         mp_in_ready, mp_out_valid, mp_out_ready, pk_valid_q;
  logic [63:0]  mp_out_data;
  logic [511:0] pk_q_data;

  maxpool_unit #(.LANES(8)) u_mp (
    .clk, .rst_n, .start, .window(cfg.window),
    .in_data(in_data[int'(up_q)*64 +: 64]), .in_valid(in_valid && pool), .in_ready(mp_in_ready),
    .out_data(mp_out_data), .out_valid(mp_out_valid), .out_ready(mp_out_ready)
  );

  assign mp_out_ready = !pk_valid_q || (out_ready && pool);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_q       <= '0;
      pk_q       <= '0;
      pk_valid_q <= 1'b0;
      pk_q_data  <= '0;
    end else if (start) begin
      up_q       <= '0;
      pk_q       <= '0;
      pk_valid_q <= 1'b0;
    end else begin
      if (pool && in_valid && mp_in_ready) up_q <= up_q + 1'b1;
      if (pk_valid_q && out_ready && pool) pk_valid_q <= 1'b0;
      if (mp_out_valid && mp_out_ready) begin
        pk_q_data[int'(pk_q)*64 +: 64] <= mp_out_data;
        pk_q <= pk_q + 1'b1;
        if (pk_q == 3'd7) pk_valid_q <= 1'b1;
      end
    end
  end

  // ---- mode mux ----
  assign in_ready     = pool ? (mp_in_ready && up_q == 3'd7) : lt_in_ready;
  assign out_valid    = pool ? pk_valid_q : lt_out_valid;
  assign out_data     = pool ? pk_q_data  : lt_out_data;
  assign lt_out_ready = out_ready && !pool;
endmodule
