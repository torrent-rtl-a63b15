// tb_torrent_backend: two backends wired back to back over AXI.
// Node A sends a 3-frame cfg burst, then starts a 40-beat data transfer
// from its port-2 stream and, while the data are under way, a Grant
// message; node B answers with a Finish. Checks at B: the cfg frames in
// order on the cfg stream, one Grant pulse, all 40 data beats in order on
// port 4 with random backpressure; at A: tx_done once and the Finish pulse.
// The message must wait for the running data burst and must not corrupt
// the data stream.
// Sharing one AXI master between messages and data is this implementation's choice.
module tb_torrent_backend;
  import torrent_pkg::*;
  localparam int unsigned BB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axi_aw_t [1:0] aw; axi_w_t [1:0] w; axi_b_t [1:0] b;
  logic [1:0] aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic [1:0][ADDR_W-1:0] msg_addr;
  logic [1:0][7:0] msg_len;
  logic [1:0][DATA_W-1:0] msg_data, cfg_data, p2_data, p4_data;
  logic [1:0] msg_valid, msg_ready, cfg_valid, cfg_ready, cfg_pending, grant, finish;
  logic [1:0] tx_start, tx_done, p2_valid, p2_ready, p4_valid, p4_ready;
  logic [1:0][ADDR_W-1:0] tx_addr;
  logic [1:0][SIZE_W-1:0] tx_beats;
  int checks = 0, failures = 0;
  int n_cfg = 0, n_data = 0, n_grant = 0, n_finish = 0, n_txdone = 0;

  for (genvar n = 0; n < 2; n++) begin : g_node
    torrent_backend #(.BURST_BEATS(BB)) dut (
      .clk_i (clk), .rst_ni (rst_n),
      .m_aw_o (aw[n]), .m_aw_valid_o (aw_valid[n]), .m_aw_ready_i (aw_ready[1-n]),
      .m_w_o (w[n]), .m_w_valid_o (w_valid[n]), .m_w_ready_i (w_ready[1-n]),
      .m_b_i (b[1-n]), .m_b_valid_i (b_valid[1-n]), .m_b_ready_o (b_ready[n]),
      .s_aw_i (aw[1-n]), .s_aw_valid_i (aw_valid[1-n]), .s_aw_ready_o (aw_ready[n]),
      .s_w_i (w[1-n]), .s_w_valid_i (w_valid[1-n]), .s_w_ready_o (w_ready[n]),
      .s_b_o (b[n]), .s_b_valid_o (b_valid[n]), .s_b_ready_i (b_ready[1-n]),
      .msg_addr_i (msg_addr[n]), .msg_len_i (msg_len[n]), .msg_data_i (msg_data[n]),
      .msg_valid_i (msg_valid[n]), .msg_ready_o (msg_ready[n]),
      .cfg_data_o (cfg_data[n]), .cfg_valid_o (cfg_valid[n]), .cfg_ready_i (cfg_ready[n]),
      .cfg_pending_o (cfg_pending[n]), .grant_o (grant[n]), .finish_o (finish[n]),
      .tx_start_i (tx_start[n]), .tx_addr_i (tx_addr[n]), .tx_beats_i (tx_beats[n]), .tx_done_o (tx_done[n]),
      .p2_data_i (p2_data[n]), .p2_valid_i (p2_valid[n]), .p2_ready_o (p2_ready[n]),
      .p4_data_o (p4_data[n]), .p4_valid_o (p4_valid[n]), .p4_ready_i (p4_ready[n]));
  end

  // node B sinks
  always @(negedge clk) p4_ready[1] = ($urandom % 100) < 50;
  always @(posedge clk) if (rst_n) begin
    if (cfg_valid[1] && cfg_ready[1]) begin
      checks++;
      if (cfg_data[1] != {DATA_W/32{32'hC0F0_0000 + 32'(n_cfg)}}) begin failures++; $display("FAIL cfg %0d", n_cfg); end
      n_cfg++;
    end
    if (p4_valid[1] && p4_ready[1]) begin
      checks++;
      if (p4_data[1] != {DATA_W/32{32'hDA7A_0000 + 32'(n_data)}}) begin failures++; $display("FAIL data %0d", n_data); end
      n_data++;
    end
    if (grant[1]) n_grant++;
    if (finish[0]) n_finish++;
    if (tx_done[0]) n_txdone++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_msg(input int n, input logic [ADDR_W-1:0] a, input int beats, input int seq);
    int i;
    i = 0;
    @(negedge clk);
    msg_addr[n] = a; msg_len[n] = 8'(beats - 1); msg_valid[n] = 1;
    while (i < beats) begin
      msg_data[n] = {DATA_W/32{32'hC0F0_0000 + 32'(seq + i)}};
      #1;
      if (msg_ready[n]) i++;
      @(negedge clk);
    end
    msg_valid[n] = 0;
  endtask

  initial begin
    int sent;
    msg_valid = '0; msg_addr = '0; msg_len = '0; msg_data = '0;
    cfg_ready = '1; tx_start = '0; tx_addr = '0; tx_beats = '0;
    p2_valid = '0; p2_data = '0; p4_ready[0] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_msg(0, kind_addr(node_base(16'd2), KIND_CFG), 3, 0);
    // data transfer with a Grant message injected after a few beats
    @(negedge clk);
    tx_start[0] = 1; tx_addr[0] = kind_addr(node_base(16'd2), KIND_DATA); tx_beats[0] = 40;
    @(negedge clk);
    tx_start[0] = 0;
    sent = 0;
    fork
      while (sent < 40) begin
        p2_valid[0] = 1;
        p2_data[0] = {DATA_W/32{32'hDA7A_0000 + 32'(sent)}};
        #1;
        if (p2_ready[0]) sent++;
        @(negedge clk);
        p2_valid[0] = 0;
      end
      begin
        repeat (12) @(negedge clk);
        send_msg(0, kind_addr(node_base(16'd2), KIND_GRANT), 1, 100);
        checks++;
        if (n_data >= 40) begin failures++; $display("FAIL: message did not overlap the transfer"); end
      end
    join
    repeat (40) @(negedge clk);
    send_msg(1, kind_addr(node_base(16'd1), KIND_FINISH), 1, 200);
    repeat (10) @(negedge clk);
    checks++;
    if (n_cfg != 3 || n_data != 40 || n_grant != 1 || n_finish != 1 || n_txdone != 1) begin
      failures++; $display("FAIL counts cfg %0d data %0d grant %0d finish %0d txdone %0d",
                           n_cfg, n_data, n_grant, n_finish, n_txdone);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
