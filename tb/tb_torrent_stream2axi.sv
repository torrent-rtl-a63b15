// tb_torrent_stream2axi: conversion of a beat stream into AXI write bursts.
// For several lengths (shorter than, equal to and not a multiple of the
// burst size) it checks: each AW carries the destination address with the
// offset advanced by the bytes already sent, len = beats - 1 of a full
// burst except the last; the W beats carry the stream in order with WLAST
// on the last beat of each burst; no AW is issued while allow_i is low;
// done_o pulses once after the last beat. Random AW/W readiness stalls the
// bus. With a ready bus a burst of B beats costs B + 1 cycles (one for AW),
// plus one cycle for the done pulse at the end.
// Burst size and address layout are this implementation's choices.
module tb_torrent_stream2axi;
  import torrent_pkg::*;
  localparam int unsigned BB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, allow, busy, done;
  logic [ADDR_W-1:0] addr;
  logic [SIZE_W-1:0] beats;
  logic [DATA_W-1:0] in_data;
  logic in_valid, in_ready;
  axi_aw_t aw;
  axi_w_t w;
  logic aw_valid, aw_ready, w_valid, w_ready;
  int checks = 0, failures = 0;

  torrent_stream2axi #(.BURST_BEATS(BB)) dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .addr_i (addr), .beats_i (beats),
    .allow_i (allow), .busy_o (busy), .done_o (done),
    .in_data_i (in_data), .in_valid_i (in_valid), .in_ready_o (in_ready),
    .aw_o (aw), .aw_valid_o (aw_valid), .aw_ready_i (aw_ready),
    .w_o (w), .w_valid_o (w_valid), .w_ready_i (w_ready));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int pr, input bit gate, output int cyc);
    int sent, wbeats, bursts, left, dones;
    logic [ADDR_W-1:0] exp_addr;
    addr = kind_addr(node_base(16'd3), KIND_DATA) | 32'h0000_3F00;  // near the window's end
    exp_addr = addr;
    beats = n;
    @(negedge clk); start = 1; allow = !gate;
    @(negedge clk); start = 0;
    sent = 0; wbeats = 0; bursts = 0; left = 0; dones = 0; cyc = 0;
    while (wbeats < n || dones == 0) begin
      in_valid = sent < n;
      in_data  = {DATA_W/32{32'(sent) ^ 32'h5A5A_0000}};
      aw_ready = ($urandom % 100) < pr;
      w_ready  = ($urandom % 100) < pr;
      if (gate && cyc == 10) allow = 1;
      #1;
      if (aw_valid && !allow) begin failures++; $display("FAIL: AW while not allowed"); end
      if (aw_valid && aw_ready) begin
        checks++;
        if (left != 0) begin failures++; $display("FAIL: AW inside a burst"); end
        left = (n - wbeats >= BB) ? BB : n - wbeats;
        checks++;
        if (aw.addr != exp_addr || aw.len != 8'(left - 1)) begin
          failures++; $display("FAIL AW %h len %0d, want %h len %0d", aw.addr, aw.len, exp_addr, left - 1);
        end
        exp_addr[KIND_LSB-1:0] = exp_addr[KIND_LSB-1:0] + KIND_LSB'(left * BEAT_B);
        bursts++;
      end
      if (w_valid && w_ready) begin
        checks++;
        if (w.data != {DATA_W/32{32'(wbeats) ^ 32'h5A5A_0000}} || w.last != (left == 1)) begin
          failures++; $display("FAIL W beat %0d last %0d", wbeats, w.last);
        end
        wbeats++; left--;
      end
      if (in_valid && in_ready) sent++;
      if (done) dones++;
      cyc++;
      @(negedge clk);
      if (cyc > 10000) break;
    end
    repeat (3) @(negedge clk);
    #1;
    if (done) dones++;
    checks++;
    if (dones != 1 || busy) begin failures++; $display("FAIL: %0d done pulses", dones); end
    checks++;
    if (bursts != (n + BB - 1) / BB) begin failures++; $display("FAIL: %0d bursts", bursts); end
  endtask

  initial begin
    int cyc;
    start = 0; allow = 0; in_valid = 0; aw_ready = 0; w_ready = 0; addr = '0; beats = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 100, 0, cyc);
    run(4, 100, 0, cyc);
    run(11, 100, 0, cyc);
    run(16, 100, 0, cyc);
    checks++;
    // 16 data cycles, one address cycle per burst, one for the done pulse
    if (cyc != 16 + 16 / BB + 2) begin failures++; $display("FAIL: 16 beats took %0d cycles", cyc); end
    run(23, 40, 0, cyc);
    run(9, 70, 1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
