// tb_torrent_dse_rd: the reading data streaming engine.
// A behavioural memory with one port per channel grants requests at random
// and answers one cycle after the grant; every 64-bit word holds a value
// computed from its own address. For linear and strided 2-D / 3-D patterns
// the packed output beats must hold, in channel c, the word at
// base + sum_d i_d * stride_d + c * sstride. Checks the number of beats,
// the done pulse, that a beat never leaves before every channel has its
// word, and, with a memory that always grants and an output that is always
// ready, one 64-byte beat per cycle after a short start-up.
// The channel layout (word c of a beat at + c * sstride) and the memory timing are this implementation's; the rate target is the published 64 B per cycle.
module tb_torrent_dse_rd;
  import torrent_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  dse_cfg_t cfg;
  logic [NC-1:0] req, gnt, rvalid;
  mem_req_t [NC-1:0] rq;
  logic [NC-1:0][BANK_W-1:0] rdata;
  logic [DATA_W-1:0] out_data;
  logic out_valid, out_ready;
  int gnt_pct = 100;
  int checks = 0, failures = 0;

  torrent_dse_rd #(.FIFO_DEPTH(4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .cfg_i (cfg), .busy_o (busy), .done_o (done),
    .mem_req_o (req), .mem_req_data_o (rq), .mem_gnt_i (gnt), .mem_rvalid_i (rvalid),
    .mem_rdata_i (rdata), .out_data_o (out_data), .out_valid_o (out_valid), .out_ready_i (out_ready));

  function automatic logic [63:0] word_at(input logic [MADDR_W-1:0] a);
    return {32'hD5E0_0000 | 32'(a), 32'(a) * 32'h9E37_79B1};
  endfunction

  // memory model: random grant, read data one cycle later
  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      rvalid[c] <= req[c] & gnt[c];
      rdata[c]  <= word_at(rq[c].addr);
    end
  end
  always @(negedge clk) for (int c = 0; c < NC; c++) gnt[c] = ($urandom % 100) < gnt_pct;

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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input dse_cfg_t c, input int pg, input int pr, output int cyc);
    int unsigned total, got;
    bit done_seen;
    cfg = c; gnt_pct = pg;
    total = 1;
    for (int d = 0; d < NDIM; d++) total *= (c.bound[d] == 0) ? 1 : c.bound[d];
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    got = 0; cyc = 0; done_seen = 0;
    while (!done_seen) begin
      out_ready = ($urandom % 100) < pr;
      #1;
      if (out_valid && out_ready) begin
        for (int ch = 0; ch < NC; ch++) begin
          checks++;
          if (out_data[ch*BANK_W +: BANK_W] !== word_at(beat_addr(c, got) + MADDR_W'(ch) * c.sstride)) begin
            failures++; $display("FAIL beat %0d ch %0d", got, ch);
          end
        end
        got++;
      end
      if (done) done_seen = 1;
      cyc++;
      @(negedge clk);
      if (cyc > 100000) break;
    end
    checks++;
    if (got != total) begin failures++; $display("FAIL %0d beats, want %0d", got, total); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    dse_cfg_t c;
    int cyc;
    start = 0; out_ready = 0; cfg = '0;
    for (int ch = 0; ch < NC; ch++) begin rvalid[ch] = 0; rdata[ch] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // linear, 64 beats, full rate
    c = '0; c.base = 20'h1000; c.sstride = 8; c.bound[0] = 64; c.tstride[0] = 64;
    run(c, 100, 100, cyc);
    checks++;
    if (cyc > 64 + 4) begin failures++; $display("FAIL: 64 beats took %0d cycles", cyc); end
    $display("linear 64 beats: %0d cycles", cyc);
    // same with stalls on both sides
    run(c, 60, 50, cyc);
    // 2-D transpose-like pattern: channel stride is a row, beats walk columns
    c = '0; c.base = 20'h2000; c.sstride = 256; c.bound[0] = 4; c.tstride[0] = 8;
    c.bound[1] = 5; c.tstride[1] = 2048;
    run(c, 70, 70, cyc);
    // 3-D with a zero bound (counts as one)
    c = '0; c.base = 20'h0040; c.sstride = 64; c.bound[0] = 3; c.tstride[0] = 512;
    c.bound[1] = 0; c.tstride[1] = 4; c.bound[2] = 4; c.tstride[2] = 8;
    run(c, 80, 90, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
