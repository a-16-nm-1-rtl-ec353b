// tb_agu: runs the 6-D address generator over several random loop nests, with
// and without back-pressure, and compares every address with a nested-loop
// reference; checks one address per cycle when ready stays high.
module tb_agu;
  import voltra_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, ready = 0;
  agu_cfg_t cfg;
  addr_t addr;
  logic valid, busy;
  int checks = 0, failures = 0;
  addr_t exp_q[$];

  always #5 clk = ~clk;

  agu #(.DIMS(6)) dut (.clk, .rst_n, .start, .cfg, .addr, .valid, .ready, .busy);

  task automatic build_ref();
    int b[6];
    exp_q.delete();
    for (int d = 0; d < 6; d++) b[d] = (cfg.bound[d] == 0) ? 1 : int'(cfg.bound[d]);
    for (int i5 = 0; i5 < b[5]; i5++) for (int i4 = 0; i4 < b[4]; i4++)
    for (int i3 = 0; i3 < b[3]; i3++) for (int i2 = 0; i2 < b[2]; i2++)
    for (int i1 = 0; i1 < b[1]; i1++) for (int i0 = 0; i0 < b[0]; i0++) begin
      addr_t a;
      a = cfg.base + addr_t'(i0) * cfg.stride[0] + addr_t'(i1) * cfg.stride[1] + addr_t'(i2) * cfg.stride[2]
        + addr_t'(i3) * cfg.stride[3] + addr_t'(i4) * cfg.stride[4] + addr_t'(i5) * cfg.stride[5];
      exp_q.push_back(a);
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int n, cycles, got;
      cfg.base = addr_t'($urandom);
      for (int d = 0; d < 6; d++) begin
        cfg.bound[d]  = 16'($urandom_range(0, 3));
        cfg.stride[d] = addr_t'($urandom);
      end
      build_ref();
      n = exp_q.size();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cycles = 0; got = 0;
      while (busy) begin
        ready = (run < 6) ? 1'b1 : 1'($urandom_range(0, 1));
        #1;
        if (valid && ready) begin
          checks++;
          if (addr !== exp_q[got]) begin
            failures++;
            $display("run %0d beat %0d addr %h exp %h", run, got, addr, exp_q[got]);
          end
          got++;
        end
        @(negedge clk);
        cycles++;
      end
      ready = 0;
      checks++;
      if (got != n) begin failures++; $display("run %0d count %0d exp %0d", run, got, n); end
      if (run < 6) begin
        checks++;
        if (cycles != n) begin failures++; $display("run %0d took %0d cycles for %0d", run, cycles, n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
