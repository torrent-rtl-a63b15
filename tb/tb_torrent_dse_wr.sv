// tb_torrent_dse_wr: the writing data streaming engine.
// Numbered 512-bit beats are offered with random gaps; a behavioural memory
// grants the channel write requests at random. Every 64-bit word must land
// at base + sum_d i_d * stride_d + c * sstride with the right value, no other
// address may be written, the engine must signal done once all words are
// written, and with a memory that always grants it must take one beat per
// cycle.
// The channel layout and the memory timing are this implementation's; the rate target is the published 64 B per cycle.
module tb_torrent_dse_wr;
  import torrent_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  dse_cfg_t cfg;
  logic [NC-1:0] req, gnt;
  mem_req_t [NC-1:0] rq;
  logic [DATA_W-1:0] in_data;
  logic in_valid, in_ready;
  int gnt_pct = 100;
  logic [63:0] mem [logic [MADDR_W-1:0]];
  int writes = 0;
  int checks = 0, failures = 0;

  torrent_dse_wr #(.FIFO_DEPTH(4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .cfg_i (cfg), .busy_o (busy), .done_o (done),
    .mem_req_o (req), .mem_req_data_o (rq), .mem_gnt_i (gnt),
    .in_data_i (in_data), .in_valid_i (in_valid), .in_ready_o (in_ready));

  always @(negedge clk) for (int c = 0; c < NC; c++) gnt[c] = ($urandom % 100) < gnt_pct;
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) if (req[c] && gnt[c]) begin
      if (!rq[c].we) begin failures++; $display("FAIL: read request from the write engine"); end
      mem[rq[c].addr] = rq[c].wdata;
      writes++;
    end
  end

  function automatic logic [MADDR_W-1:0] beat_addr(input dse_cfg_t c, input int unsigned j);
    int unsigned a, r;
    a = c.base; r = j;
    for (int d = 0; d < NDIM; d++) begin
      int unsigned b;
      b = (c.bound[d] == 0) ? 1 : c.bound[d];
      a += (r % b) * c.tstride[d];
      r /= b;
    end
    return MADDR_W'(a);
  endfunction

  function automatic logic [DATA_W-1:0] beat(input int unsigned t, input int unsigned j);
    logic [DATA_W-1:0] b;
    for (int ch = 0; ch < NC; ch++) b[ch*BANK_W +: BANK_W] = {8'(t), 8'(ch), 16'(j), 32'(j * 32'h9E37_79B1 + ch)};
    return b;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int t, input dse_cfg_t c, input int pg, input int pv, output int cyc);
    int unsigned total, sent;
    bit done_seen;
    cfg = c; gnt_pct = pg;
    mem.delete(); writes = 0;
    total = 1;
    for (int d = 0; d < NDIM; d++) total *= (c.bound[d] == 0) ? 1 : c.bound[d];
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    sent = 0; cyc = 0; done_seen = 0; in_valid = 0;
    while (!done_seen) begin
      if (!in_valid || in_ready) in_valid = (sent < total) && (($urandom % 100) < pv);
      in_data = beat(t, sent);
      #1;
      if (in_valid && in_ready) sent++;
      if (done) done_seen = 1;
      cyc++;
      @(negedge clk);
      if (in_valid && sent >= total) in_valid = 0;
      if (cyc > 100000) break;
    end
    in_valid = 0;
    checks++;
    if (sent != total) begin failures++; $display("FAIL: done after %0d of %0d beats", sent, total); end
    checks++;
    if (writes != total * NC) begin failures++; $display("FAIL: %0d writes, want %0d", writes, total * NC); end
    for (int j = 0; j < total; j++) begin
      logic [DATA_W-1:0] b;
      b = beat(t, j);
      for (int ch = 0; ch < NC; ch++) begin
        logic [MADDR_W-1:0] a;
        a = beat_addr(c, j) + MADDR_W'(ch) * c.sstride;
        checks++;
        if (!mem.exists(a) || mem[a] !== b[ch*BANK_W +: BANK_W]) begin
          failures++; $display("FAIL beat %0d ch %0d at %h", j, ch, a);
        end
      end
    end
  endtask

  initial begin
    dse_cfg_t c;
    int cyc;
    start = 0; in_valid = 0; in_data = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    c = '0; c.base = 20'h4000; c.sstride = 8; c.bound[0] = 64; c.tstride[0] = 64;
    run(1, c, 100, 100, cyc);
    checks++;
    if (cyc > 64 + 4) begin failures++; $display("FAIL: 64 beats took %0d cycles", cyc); end
    $display("linear 64 beats: %0d cycles", cyc);
    run(2, c, 50, 70, cyc);
    c = '0; c.base = 20'h8000; c.sstride = 512; c.bound[0] = 4; c.tstride[0] = 8;
    c.bound[1] = 6; c.tstride[1] = 4096;
    run(3, c, 70, 70, cyc);
    c = '0; c.base = 20'h0100; c.sstride = 64; c.bound[0] = 2; c.tstride[0] = 1024;
    c.bound[1] = 0; c.bound[2] = 3; c.tstride[2] = 8;
    run(4, c, 80, 90, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
