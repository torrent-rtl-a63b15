// tb_torrent_data_switch: the four-port data switch in its four modes.
// Two instances run side by side, one without and one with a ChainWrite
// buffer on the forwarding path. For each mode numbered beats are offered
// on the source port (port 1 for Local and Read, port 4 for Write and
// ChainWrite) with random readiness at the sinks; each sink that the mode
// routes to must receive every beat in order, the others nothing, and the
// unused source must not be drained. At full readiness each mode passes one
// beat per cycle. With the buffer, a ChainWrite stream keeps going to the
// memory port while the forwarding port is stalled, for as many beats as
// the buffer holds.
// Port numbers and the four mode routes follow the published data switch; the buffer depth is a test choice.
module tb_torrent_data_switch;
  import torrent_pkg::*;
  localparam int unsigned BUF = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sw_mode_e mode;
  logic [DATA_W-1:0] p1_data, p4_data;
  logic [1:0] p1_valid, p4_valid;
  logic p2_ready, p3_ready;
  logic [1:0][DATA_W-1:0] p2_data, p3_data;
  logic [1:0] p1_ready, p4_ready, p2_valid, p3_valid;
  int checks = 0, failures = 0;

  torrent_data_switch #(.CW_BUF_DEPTH(0)) dut0 (
    .clk_i (clk), .rst_ni (rst_n), .mode_i (mode),
    .p1_data_i (p1_data), .p1_valid_i (p1_valid[0]), .p1_ready_o (p1_ready[0]),
    .p2_data_o (p2_data[0]), .p2_valid_o (p2_valid[0]), .p2_ready_i (p2_ready),
    .p3_data_o (p3_data[0]), .p3_valid_o (p3_valid[0]), .p3_ready_i (p3_ready),
    .p4_data_i (p4_data), .p4_valid_i (p4_valid[0]), .p4_ready_o (p4_ready[0]));
  torrent_data_switch #(.CW_BUF_DEPTH(BUF)) dut1 (
    .clk_i (clk), .rst_ni (rst_n), .mode_i (mode),
    .p1_data_i (p1_data), .p1_valid_i (p1_valid[1]), .p1_ready_o (p1_ready[1]),
    .p2_data_o (p2_data[1]), .p2_valid_o (p2_valid[1]), .p2_ready_i (p2_ready),
    .p3_data_o (p3_data[1]), .p3_valid_o (p3_valid[1]), .p3_ready_i (p3_ready),
    .p4_data_i (p4_data), .p4_valid_i (p4_valid[1]), .p4_ready_o (p4_ready[1]));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one mode, one instance (the other sees no traffic); p2stall_first: hold port 2 for that many cycles at start
  task automatic run(input int k, input sw_mode_e m, input int n, input int pr, input int p2stall, output int cyc);
    int sent, got2, got3;
    bit from4, to2, to3;
    from4 = (m == SW_WRITE) || (m == SW_CW);
    to2   = (m == SW_READ)  || (m == SW_CW);
    to3   = (m != SW_READ);
    mode = m;
    sent = 0; got2 = 0; got3 = 0; cyc = 0;
    while (sent < n || (to2 && got2 < n) || (to3 && got3 < n)) begin
      @(negedge clk);
      p1_valid = '0; p4_valid = '0;
      p1_valid[k] = !from4 && sent < n;
      p4_valid[k] = from4 && sent < n;
      p1_data = DATA_W'(sent) ^ {DATA_W/32{32'hA5A5_0000}};
      p4_data = p1_data;
      p2_ready = (cyc >= p2stall) && (($urandom % 100) < pr);
      p3_ready = ($urandom % 100) < pr;
      #1;
      if (p2_valid[k] && p2_ready) begin
        checks++;
        if (!to2 || p2_data[k] != (DATA_W'(got2) ^ {DATA_W/32{32'hA5A5_0000}})) begin
          failures++; $display("FAIL inst %0d mode %0d port2 beat %0d", k, m, got2);
        end
        got2++;
      end
      if (p3_valid[k] && p3_ready) begin
        checks++;
        if (!to3 || p3_data[k] != (DATA_W'(got3) ^ {DATA_W/32{32'hA5A5_0000}})) begin
          failures++; $display("FAIL inst %0d mode %0d port3 beat %0d", k, m, got3);
        end
        got3++;
      end
      checks++;
      if ((from4 && p1_ready[k]) || (!from4 && p4_ready[k])) begin
        failures++; $display("FAIL inst %0d mode %0d: unused source drained", k, m);
      end
      if ((from4 ? p4_ready[k] : p1_ready[k]) && sent < n) sent++;
      if (cyc == p2stall - 1 && p2stall > 0) begin
        checks++;
        if (got3 != ((k == 1) ? BUF + 1 : 1) && m == SW_CW) begin
          failures++; $display("FAIL inst %0d: %0d beats stored while port 2 stalled", k, got3);
        end
      end
      cyc++;
      if (cyc > 20 * n + 100) break;
    end
    @(negedge clk);
    p1_valid = '0; p4_valid = '0;
    checks++;
    if ((to2 && got2 != n) || (!to2 && got2 != 0) || (to3 && got3 != n) || (!to3 && got3 != 0)) begin
      failures++; $display("FAIL inst %0d mode %0d counts %0d %0d", k, m, got2, got3);
    end
  endtask

  initial begin
    int cyc;
    p1_valid = '0; p4_valid = '0; p2_ready = 0; p3_ready = 0; mode = SW_LOCAL;
    p1_data = '0; p4_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2; k++) begin
      for (int m = 0; m < 4; m++) begin
        run(k, sw_mode_e'(m), 200, 60, 0, cyc);
        run(k, sw_mode_e'(m), 100, 100, 0, cyc);
        checks++;
        // the buffered forward path adds its fill latency at the end
        if (cyc > 100 + ((k == 1) ? 1 : 0)) begin
          failures++; $display("FAIL inst %0d mode %0d: %0d cycles for 100 beats", k, m, cyc);
        end
      end
      // forwarding stalled for 20 cycles: the buffered switch keeps storing
      run(k, SW_CW, 50, 100, 20, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
