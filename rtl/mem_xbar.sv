// mem_xbar: fully connected crossbar between 64-bit requester ports and the
// banks of the shared memory.
//
// Byte address bits [7:3] pick the bank and [16:8] the row. Each bank grants at
// most one requester per cycle, chosen round-robin starting after the port it
// granted last, so contention costs cycles but never starves a port. The grant
// (rsp.gnt) is combinational in the request cycle; read data come back with
// rsp.rvalid one cycle later, routed to the port that was granted. A port may
// withdraw or change a request that was not granted (the arbiter keeps no
// state for it), which the time-multiplexed psum/output ports rely on. The
// crossbar itself is from the paper; the round-robin policy and the timing
// are this design's choices.
module mem_xbar
  import voltra_pkg::*;
#(
  parameter int unsigned NPORTS = 80,
  parameter int unsigned NBANKS = BANKS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mem_req_t [NPORTS-1:0]    req_i,
  output mem_rsp_t [NPORTS-1:0]    rsp_o,
  output logic [NBANKS-1:0]        bank_req,
  output logic [NBANKS-1:0]        bank_we,
  output logic [NBANKS-1:0][BANK_AW-1:0] bank_row,
  output word_t [NBANKS-1:0]       bank_wdata,
  input  word_t [NBANKS-1:0]       bank_rdata
);
  localparam int unsigned PW = $clog2(NPORTS);
  localparam int unsigned SW = $clog2(NBANKS);

  logic [NBANKS-1:0][PW-1:0] last_q, sel;
  logic [NBANKS-1:0]         hit;
  logic [NBANKS-1:0][PW-1:0] rd_port_q;
  logic [NBANKS-1:0]         rd_valid_q;

  function automatic logic [SW-1:0] bank_of(addr_t a);
    return a[3 +: SW];
  endfunction

  // round-robin choice per bank
  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      hit[b] = 1'b0;
      sel[b] = '0;
      for (int k = 1; k <= NPORTS; k++) begin
        int p;
        p = (int'(last_q[b]) + k) % NPORTS;
        if (!hit[b] && req_i[p].req && bank_of(req_i[p].addr) == SW'(b)) begin
          hit[b] = 1'b1;
          sel[b] = PW'(p);
        end
      end
      bank_req[b]   = hit[b];
      bank_we[b]    = req_i[sel[b]].we;
      bank_row[b]   = req_i[sel[b]].addr[3+SW +: BANK_AW];
      bank_wdata[b] = req_i[sel[b]].wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q     <= '0;
      rd_port_q  <= '0;
      rd_valid_q <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        if (hit[b]) last_q[b] <= sel[b];
        rd_valid_q[b] <= hit[b] && !req_i[sel[b]].we;
        rd_port_q[b]  <= sel[b];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp_o[p] = '0;
    end
    for (int b = 0; b < NBANKS; b++) begin
      if (hit[b]) rsp_o[sel[b]].gnt = 1'b1;
      if (rd_valid_q[b]) begin
        rsp_o[rd_port_q[b]].rvalid = 1'b1;
        rsp_o[rd_port_q[b]].rdata  = bank_rdata[b];
      end
    end
  end

  // a grant always answers a request, and a bank serves one port per cycle
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) rsp_o[p].gnt |-> req_i[p].req)
      else $error("mem_xbar: port %0d granted without a request", p);
    for (genvar q = p + 1; q < NPORTS; q++) begin : g_pair
      assert property (@(posedge clk) disable iff (!rst_n)
                       (rsp_o[p].gnt && rsp_o[q].gnt) |-> (bank_of(req_i[p].addr) != bank_of(req_i[q].addr)))
        else $error("mem_xbar: ports %0d and %0d granted the same bank", p, q);
    end
  end
endmodule
