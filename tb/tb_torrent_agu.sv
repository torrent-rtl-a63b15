// tb_torrent_agu: random 4-D patterns against an address formula.
// For each pattern the address sequence must equal
// base + sum_d i_d * stride_d (dimension 0 innermost), with exactly
// prod(bound) addresses, last_o on the final one, random ready stalls,
// and one address per cycle when ready stays high.
// The reference formula is the N-D affine access the published engine performs; bound 0 = 1 is this implementation's rule.
module tb_torrent_agu;
  import torrent_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, valid, ready, last, busy;
  dse_cfg_t cfg;
  logic [MADDR_W-1:0] addr;
  int checks = 0, failures = 0;

  torrent_agu dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start), .cfg_i (cfg),
                   .addr_o (addr), .valid_o (valid), .ready_i (ready), .last_o (last), .busy_o (busy));

  function automatic int unsigned ref_addr(input dse_cfg_t c, input int unsigned j);
    int unsigned a, r;
    a = c.base; r = j;
    for (int d = 0; d < NDIM; d++) begin
      int unsigned b;
      b = (c.bound[d] == 0) ? 1 : c.bound[d];
      a += (r % b) * c.tstride[d];
      r /= b;
    end
    return a % (1 << MADDR_W);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ready = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int unsigned total, got, cyc;
      bit stall;
      stall = (t % 2) == 1;
      cfg.base = MADDR_W'($urandom);
      total = 1;
      for (int d = 0; d < NDIM; d++) begin
        cfg.bound[d] = BOUND_W'($urandom % 5);   // 0 counts as 1
        cfg.tstride[d] = MADDR_W'($urandom);
        total *= (cfg.bound[d] == 0) ? 1 : cfg.bound[d];
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      got = 0; cyc = 0;
      while (busy) begin
        ready = stall ? ($urandom % 2) : 1'b1;
        #1;
        if (valid && ready) begin
          checks++;
          if (addr !== MADDR_W'(ref_addr(cfg, got))) begin
            failures++; $display("FAIL pat %0d idx %0d: %h vs %h", t, got, addr, ref_addr(cfg, got));
          end
          checks++;
          if (last != (got == total - 1)) begin failures++; $display("FAIL last at %0d", got); end
          got++;
        end
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (got != total) begin failures++; $display("FAIL pat %0d: %0d addresses, want %0d", t, got, total); end
      if (!stall) begin
        checks++;
        if (cyc != total) begin failures++; $display("FAIL pat %0d: %0d cycles for %0d addresses", t, cyc, total); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
