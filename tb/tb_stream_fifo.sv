// tb_stream_fifo: random push/pop traffic against a queue reference.
// Checks order and contents of every word, the count output, that a full
// FIFO refuses input and that an empty one offers nothing.
// The published design only draws these FIFOs; the tests check this implementation's valid/ready rules.
module tb_stream_fifo;
  localparam int unsigned W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] in_data, out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int full_seen = 0, empty_seen = 0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .clk_i (clk), .rst_ni (rst_n), .flush_i (1'b0),
    .in_data_i (in_data), .in_valid_i (in_valid), .in_ready_o (in_ready),
    .out_data_o (out_data), .out_valid_o (out_valid), .out_ready_i (out_ready),
    .count_o (count));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // phases: fill-heavy, drain-heavy, balanced
      in_valid  = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 80 : 30);
      out_ready = ($urandom % 100) < ((cyc / 500) % 2 == 0 ? 30 : 80);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (count != q.size()) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
      checks++;
      if (in_ready != (q.size() < D)) begin failures++; $display("FAIL in_ready"); end
      checks++;
      if (out_valid != (q.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (q.size() == D) full_seen++;
      if (q.size() == 0) empty_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL data %h vs %h", out_data, q[0]); end
        void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0) begin failures++; $display("FAIL: full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
