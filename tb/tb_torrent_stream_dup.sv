// tb_torrent_stream_dup: the Duplicate unit of the data switch.
// Streams numbered beats in with random valid gaps, and takes them out of
// both channels with independent random ready. Each enabled channel must
// see every beat exactly once and in order, a disabled channel none; the
// source may only advance after every enabled channel has taken the beat.
// With both readies high the unit must pass one beat per cycle.
// The behaviour checked (no beat lost or repeated, no storage) is the published function of the duplicator.
module tb_torrent_stream_dup;
  localparam int unsigned W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ch0_en, ch1_en, valid, ready, ch0_valid, ch1_valid, ch0_ready, ch1_ready;
  logic [W-1:0] data, ch0_data, ch1_data;
  int checks = 0, failures = 0;

  torrent_stream_dup #(.WIDTH(W)) dut (.clk_i (clk), .rst_ni (rst_n), .*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one stream of n beats; returns the cycle count
  task automatic run(input bit e0, input bit e1, input int n, input int pv, input int pr, output int cyc);
    int sent, got0, got1;
    bit took;
    sent = 0; got0 = 0; got1 = 0; cyc = 0; took = 0;
    ch0_en = e0; ch1_en = e1;
    valid = 0;
    forever begin
      @(negedge clk);
      if (took) begin sent++; valid = 0; took = 0; end
      if (sent >= n) break;
      if (!valid) valid = ($urandom % 100) < pv;
      data = W'(sent);
      ch0_ready = ($urandom % 100) < pr;
      ch1_ready = ($urandom % 100) < pr;
      #1;
      if (ch0_valid && ch0_ready) begin
        checks++;
        if (!e0 || ch0_data != W'(got0)) begin failures++; $display("FAIL ch0 beat %0d got %0d", got0, ch0_data); end
        got0++;
      end
      if (ch1_valid && ch1_ready) begin
        checks++;
        if (!e1 || ch1_data != W'(got1)) begin failures++; $display("FAIL ch1 beat %0d got %0d", got1, ch1_data); end
        got1++;
      end
      if (valid && ready) begin
        took = 1;
        checks++;
        if ((e0 && got0 != sent + 1) || (e1 && got1 != sent + 1)) begin
          failures++; $display("FAIL: source advanced before all channels took beat %0d", sent);
        end
      end
      cyc++;
    end
    checks++;
    if ((e0 ? got0 : 0) != (e0 ? n : 0) || (e1 ? got1 : 0) != (e1 ? n : 0)) begin
      failures++; $display("FAIL counts %0d %0d of %0d", got0, got1, n);
    end
  endtask

  initial begin
    int cyc;
    valid = 0; ch0_en = 0; ch1_en = 0; ch0_ready = 0; ch1_ready = 0; data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 1, 500, 70, 50, cyc);
    run(1, 0, 300, 70, 50, cyc);
    run(0, 1, 300, 70, 50, cyc);
    run(1, 1, 300, 100, 30, cyc);
    // full rate
    run(1, 1, 200, 100, 100, cyc);
    checks++;
    if (cyc != 200) begin failures++; $display("FAIL: %0d cycles for 200 beats at full rate", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
