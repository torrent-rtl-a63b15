// tb_torrent_axi2stream: the AXI write slave of the Torrent backend.
// Writes bursts of each kind into the slave and checks how it sorts them:
// cfg beats appear on the cfg stream, grant and finish writes become one
// pulse each with the task id of the beat, data beats appear on the data
// stream (port 4) in order. Every burst ends with one B response carrying
// the write's id and OKAY. A cfg burst is refused at the address channel
// while the controller cannot take cfgs (cfg_ready low), and cfg_pending
// tells the controller one is waiting. Random W valid and stream ready.
// The address-to-kind decoding and the cfg hold-back are this implementation's choices.
module tb_torrent_axi2stream;
  import torrent_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axi_aw_t aw;
  axi_w_t w;
  axi_b_t b;
  logic aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic [DATA_W-1:0] cfg_data, data;
  logic cfg_valid, cfg_ready, cfg_pending, grant, finish, data_valid, data_ready;
  logic [TASK_W-1:0] msg_task;
  int checks = 0, failures = 0;
  int n_cfg = 0, n_grant = 0, n_finish = 0, n_data = 0;
  logic [TASK_W-1:0] last_task;

  torrent_axi2stream dut (
    .clk_i (clk), .rst_ni (rst_n),
    .aw_i (aw), .aw_valid_i (aw_valid), .aw_ready_o (aw_ready),
    .w_i (w), .w_valid_i (w_valid), .w_ready_o (w_ready),
    .b_o (b), .b_valid_o (b_valid), .b_ready_i (b_ready),
    .cfg_data_o (cfg_data), .cfg_valid_o (cfg_valid), .cfg_ready_i (cfg_ready),
    .cfg_pending_o (cfg_pending), .grant_o (grant), .finish_o (finish), .msg_task_o (msg_task),
    .data_o (data), .data_valid_o (data_valid), .data_ready_i (data_ready));

  // sinks: count and check what comes out
  always @(posedge clk) if (rst_n) begin
    if (cfg_valid && cfg_ready) begin
      checks++;
      if (cfg_data != {DATA_W/32{32'hC0F0_0000 + 32'(n_cfg)}}) begin failures++; $display("FAIL cfg beat %0d", n_cfg); end
      n_cfg++;
    end
    if (data_valid && data_ready) begin
      checks++;
      if (data != {DATA_W/32{32'hDA7A_0000 + 32'(n_data)}}) begin failures++; $display("FAIL data beat %0d", n_data); end
      n_data++;
    end
    if (grant) begin n_grant++; last_task = msg_task; end
    if (finish) begin n_finish++; last_task = msg_task; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one burst of n beats of kind k with id; beat i carries base + seq + i
  task automatic burst(input kind_e k, input int n, input logic [ID_W-1:0] id, input int seq, input int pv);
    int i;
    @(negedge clk);
    aw = '{id: id, addr: kind_addr(node_base(16'd1), k), len: 8'(n - 1)};
    aw_valid = 1;
    do begin #1; @(negedge clk); end while (!(aw_valid && aw_ready_q));
    aw_valid = 0;
    i = 0;
    while (i < n) begin
      w_valid = ($urandom % 100) < pv;
      unique case (k)
        KIND_CFG:  w.data = {DATA_W/32{32'hC0F0_0000 + 32'(seq + i)}};
        KIND_DATA: w.data = {DATA_W/32{32'hDA7A_0000 + 32'(seq + i)}};
        default:   w.data = DATA_W'(seq);
      endcase
      w.last = (i == n - 1);
      #1;
      if (w_valid && w_ready) i++;
      @(negedge clk);
    end
    w_valid = 0;
    b_ready = 0;
    repeat ($urandom % 3) @(negedge clk);
    b_ready = 1;
    #1;
    checks++;
    if (!b_valid || b.id != id || b.resp != 2'b00) begin failures++; $display("FAIL: B response id %0d", b.id); end
    @(negedge clk);
    b_ready = 0;
  endtask

  // aw_ready sampled at the clock edge the handshake uses
  logic aw_ready_q;
  always @(posedge clk) aw_ready_q = aw_ready;

  initial begin
    aw = '0; w = '0; aw_valid = 0; w_valid = 0; b_ready = 0;
    cfg_ready = 1; data_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // cfg: 3 frames
    burst(KIND_CFG, 3, 8'd5, 0, 70);
    // grant and finish: one beat each, carrying task id 0x21 / 0x22
    burst(KIND_GRANT, 1, 8'd6, 32'h21, 100);
    checks++;
    if (n_grant != 1 || last_task != 8'h21) begin failures++; $display("FAIL grant pulse"); end
    burst(KIND_FINISH, 1, 8'd7, 32'h22, 100);
    checks++;
    if (n_finish != 1 || last_task != 8'h22) begin failures++; $display("FAIL finish pulse"); end
    // data: 20 beats with a slow stream sink
    fork
      burst(KIND_DATA, 20, 8'd8, 0, 80);
      begin
        while (n_data < 20) begin @(negedge clk); data_ready = ($urandom % 100) < 40; end
        data_ready = 1;
      end
    join
    // cfg held back while the controller is busy
    cfg_ready = 0;
    @(negedge clk);
    aw = '{id: 8'd9, addr: kind_addr(node_base(16'd1), KIND_CFG), len: 8'd1};
    aw_valid = 1;
    repeat (10) begin
      #1;
      checks++;
      if (aw_ready || !cfg_pending) begin failures++; $display("FAIL: cfg accepted while busy"); end
      @(negedge clk);
    end
    aw_valid = 0;
    cfg_ready = 1;
    burst(KIND_CFG, 2, 8'd9, 3, 100);
    checks++;
    if (n_cfg != 5 || n_data != 20 || n_grant != 1 || n_finish != 1) begin
      failures++; $display("FAIL counts cfg %0d data %0d", n_cfg, n_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
