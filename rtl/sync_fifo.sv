// sync_fifo: synchronous first-in first-out buffer with valid/ready ports.
//
// Holds up to DEPTH entries of WIDTH bits. push_ready is high while not full,
// pop_valid while not empty; pushing and popping in the same cycle is allowed.
// The data head is read straight from the storage array (no output register),
// so an entry pushed in cycle t can be popped in cycle t+1. `count` gives the
// occupancy, used by the streamers to decide when to prefetch.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_valid,
  output logic                       push_ready,
  input  logic [WIDTH-1:0]           push_data,
  output logic                       pop_valid,
  input  logic                       pop_ready,
  output logic [WIDTH-1:0]           pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_q, rd_q;
  logic             push, pop;

  assign push_ready = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign pop_valid  = (count != '0);
  assign push       = push_valid && push_ready;
  assign pop        = pop_valid && pop_ready;
  assign pop_data   = mem[rd_q];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q  <= '0;
      rd_q  <= '0;
      count <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      count <= count + CW'(push) - CW'(pop);
    end
  end
endmodule
