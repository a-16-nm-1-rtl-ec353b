// layout_transform_unit: data layout transformation stage of the reshuffler.
//
// Works on 512-bit beats of eight 64-bit words. The reshuffler's read
// streamer gathers the eight words from wherever the source layout keeps them
// and its write streamer scatters them to the target layout; this unit sits
// between the two and either passes the gathered block on (transpose = 0,
// e.g. row-major to blocked row-major, or HWC to C/8HWC8) or transposes it as
// an 8x8 byte matrix (transpose = 1, e.g. to swap the roles of rows and
// channels). One register stage, valid/ready on both sides, one beat per
// cycle. The paper gives only what the unit achieves; splitting the work
// between the streamers' address patterns and a transpose stage is this
// design's choice.
module layout_transform_unit (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          transpose,
  input  logic [511:0]  in_data,
  input  logic          in_valid,
  output logic          in_ready,
  output logic [511:0]  out_data,
  output logic          out_valid,
  input  logic          out_ready
);
  logic [511:0] t;

  transposer #(.N(8)) u_tr (.en(transpose), .in_data(in_data), .out_data(t));

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_data  <= '0;
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= t;
    end
  end
endmodule
