// tb_torrent_ctrl: the chain controller, driven as the other chain members
// and the local datapath would drive it.
// A monitor takes outgoing messages with random backpressure and records
// them. Scenarios:
//   1 head of a 3-destination chainwrite: the cfg of each destination
//     arrives as one burst of frames whose reassembled fields A-F name the
//     right previous / own / next hop; no data before the Grant; after the
//     Grant the read engine and the sender start in Read mode; task_done
//     and the cycle count come only after Finish;
//   2 tail: a cfg without a next hop makes it answer with a Grant to its
//     previous hop, start its write engine in Write mode with the cfg's
//     pattern, and send Finish once the write engine is done;
//   3 middle node: it holds the Grant until its successor grants, then
//     forwards it and starts writer and sender in ChainWrite mode; it
//     forwards the Finish only after its own data are stored and sent;
//   4 data source of a read: reads and sends after the Grant;
//   5 head of a read task: sends a read-type cfg, grants, writes, finishes;
//   6 local copy: starts both engines with the task's patterns;
// and throughout: a cfg is not taken while a task runs, and a pending cfg
// wins over a waiting local task.
// The phase order and roles follow the published four-phase orchestration; frame layout, message encoding and the read protocol are this implementation's.
module tb_torrent_ctrl;
  import torrent_pkg::*;
  localparam int unsigned FB = 200;                     // 2 frames per cfg
  localparam int unsigned NF = (CFG_W + FB - 1) / FB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] self_hop;
  task_desc_t td;
  logic task_valid, task_ready, task_done, busy;
  logic [31:0] cycles;
  logic [DATA_W-1:0] cfg_frame;
  logic cfg_valid, cfg_ready, cfg_pending, grant, finish;
  logic [ADDR_W-1:0] msg_addr;
  logic [7:0] msg_len;
  logic [DATA_W-1:0] msg_data;
  logic msg_valid, msg_ready;
  sw_mode_e mode;
  logic rd_start, rd_done, wr_start, wr_done, tx_start, tx_done, rx_valid;
  dse_cfg_t rd_cfg, wr_cfg;
  logic [ADDR_W-1:0] tx_addr;
  logic [SIZE_W-1:0] tx_beats;
  int checks = 0, failures = 0;

  torrent_ctrl #(.FRAME_BODY_W(FB)) dut (
    .clk_i (clk), .rst_ni (rst_n), .self_hop_i (self_hop),
    .task_i (td), .task_valid_i (task_valid), .task_ready_o (task_ready), .task_done_o (task_done),
    .cycles_o (cycles), .busy_o (busy),
    .cfg_frame_i (cfg_frame), .cfg_valid_i (cfg_valid), .cfg_ready_o (cfg_ready),
    .cfg_pending_i (cfg_pending), .grant_i (grant), .finish_i (finish),
    .msg_addr_o (msg_addr), .msg_len_o (msg_len), .msg_data_o (msg_data), .msg_valid_o (msg_valid),
    .msg_ready_i (msg_ready), .mode_o (mode),
    .rd_start_o (rd_start), .rd_cfg_o (rd_cfg), .rd_done_i (rd_done),
    .wr_start_o (wr_start), .wr_cfg_o (wr_cfg), .wr_done_i (wr_done),
    .tx_start_o (tx_start), .tx_addr_o (tx_addr), .tx_beats_o (tx_beats), .tx_done_i (tx_done),
    .rx_valid_i (rx_valid));

  // ---------------- monitor ----------------
  typedef struct {logic [ADDR_W-1:0] addr; logic [7:0] len; logic [DATA_W-1:0] data;} msg_t;
  msg_t msgs[$];
  int n_rd_start = 0, n_wr_start = 0, n_tx_start = 0, n_done = 0;
  sw_mode_e mode_at_start;
  dse_cfg_t rd_cfg_at, wr_cfg_at;
  logic [ADDR_W-1:0] tx_addr_at;
  logic [SIZE_W-1:0] tx_beats_at;
  always @(negedge clk) msg_ready = ($urandom % 100) < 60;
  always @(posedge clk) if (rst_n) begin
    if (msg_valid && msg_ready) msgs.push_back('{msg_addr, msg_len, msg_data});
    if (rd_start) begin n_rd_start++; rd_cfg_at = rd_cfg; end
    if (wr_start) begin n_wr_start++; wr_cfg_at = wr_cfg; end
    if (tx_start) begin n_tx_start++; tx_addr_at = tx_addr; tx_beats_at = tx_beats; end
    if (rd_start || wr_start || tx_start) mode_at_start = mode;
    if (task_done) n_done++;
    if (busy && cfg_ready && dut.state_q != 5'd7) begin
      failures++; $display("FAIL: cfg taken while busy");
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] hop(input int n);
    return node_base(16'(n));
  endfunction

  function automatic dse_cfg_t pat(input int k);
    dse_cfg_t d;
    d = '0;
    d.base = MADDR_W'(k * 4096); d.sstride = 8; d.bound[0] = 16'(k + 2); d.tstride[0] = 64;
    return d;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
  endtask

  task automatic wait_msgs(input int n);
    int t;
    t = 0;
    while (msgs.size() < n && t < 1000) begin @(negedge clk); t++; end
  endtask

  // send one cfg from a "remote" initiator, frame by frame
  task automatic send_cfg(input req_type_e ty, input chain_cfg_t c);
    logic [NF*FB-1:0] pad;
    pad = (NF*FB)'(c);
    @(negedge clk);
    cfg_pending = 1;
    for (int f = 0; f < NF; f++) begin
      cfg_frame = '0;
      cfg_frame[DATA_W-1] = ty;
      cfg_frame[DATA_W-2 -: FID_W] = (f == 0) ? FID_W'(NF) : FID_W'(f);
      cfg_frame[FB-1:0] = pad[f*FB +: FB];
      cfg_valid = 1;
      #1;
      while (!cfg_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    cfg_valid = 0; cfg_pending = 0;
  endtask

  function automatic chain_cfg_t decode(input int first);
    logic [NF*FB-1:0] pad;
    for (int f = 0; f < NF; f++) pad[f*FB +: FB] = msgs[first + f].data[FB-1:0];
    return chain_cfg_t'(pad[CFG_W-1:0]);
  endfunction

  initial begin
    chain_cfg_t c;
    int m0;
    self_hop = hop(7);
    td = '0; task_valid = 0; cfg_frame = '0; cfg_valid = 0; cfg_pending = 0; grant = 0; finish = 0;
    rd_done = 0; wr_done = 0; tx_done = 0; rx_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1: head of a chainwrite to 3, 1, 4 ----
    td.kind = TASK_WRITE; td.task_id = 8'h31; td.n_dst = 3; td.size = 32'd2048;
    td.rd_dse = pat(9);
    td.dst[0] = '{hop(3), pat(3)}; td.dst[1] = '{hop(1), pat(1)}; td.dst[2] = '{hop(4), pat(4)};
    @(negedge clk); task_valid = 1;
    #1; chk(task_ready, "idle controller refuses a task");
    @(negedge clk); task_valid = 0;
    wait_msgs(3 * NF);
    chk(msgs.size() == 3 * NF, "three cfg bursts");
    for (int d = 0; d < 3; d++) begin
      logic [ADDR_W-1:0] exp_prev, exp_next;
      exp_prev = (d == 0) ? hop(7) : td.dst[d-1].hop;
      exp_next = (d == 2) ? NO_HOP : td.dst[d+1].hop;
      for (int f = 0; f < NF; f++) begin
        chk(msgs[d*NF+f].addr == kind_addr(td.dst[d].hop, KIND_CFG), "cfg address");
        chk(msgs[d*NF+f].len == 8'(NF - 1), "cfg burst length");
        chk(msgs[d*NF+f].data[DATA_W-1] == REQ_WRITE, "cfg type");
        chk(msgs[d*NF+f].data[DATA_W-2 -: FID_W] == ((f == 0) ? NF : f), "frame id");
      end
      c = decode(d * NF);
      chk(c.task_id == 8'h31 && c.size == 32'd2048, "fields A, E");
      chk(c.prev_hop == exp_prev && c.self_hop == td.dst[d].hop && c.next_hop == exp_next, "fields B, C, D");
      chk(c.dse == td.dst[d].dse, "field F");
    end
    repeat (5) @(negedge clk);
    chk(n_rd_start == 0 && n_tx_start == 0, "data before Grant");
    pulse(grant);
    repeat (3) @(negedge clk);
    chk(n_rd_start == 1 && n_tx_start == 1 && mode_at_start == SW_READ, "head starts reading in Read mode");
    chk(rd_cfg_at == pat(9) && tx_addr_at == kind_addr(hop(3), KIND_DATA) && tx_beats_at == 32, "head stream set-up");
    pulse(rd_done); pulse(tx_done);
    repeat (5) @(negedge clk);
    chk(n_done == 0, "done before Finish");
    pulse(finish);
    repeat (3) @(negedge clk);
    chk(n_done == 1 && !busy, "head completes on Finish");
    chk(cycles > 10 && cycles < 200, "cycle counter");
    msgs.delete();

    // ---- 2: tail ----
    c = '{task_id: 8'h42, prev_hop: hop(2), self_hop: hop(7), next_hop: NO_HOP, size: 32'd640, dse: pat(5)};
    send_cfg(REQ_WRITE, c);
    wait_msgs(1);
    chk(msgs.size() == 1 && msgs[0].addr == kind_addr(hop(2), KIND_GRANT) && msgs[0].data[TASK_W-1:0] == 8'h42,
        "tail grants its previous hop");
    repeat (3) @(negedge clk);
    chk(n_wr_start == 1 && mode_at_start == SW_WRITE && wr_cfg_at == pat(5), "tail writes in Write mode");
    pulse(rx_valid);
    repeat (4) @(negedge clk);
    chk(msgs.size() == 1, "Finish before the data are stored");
    pulse(wr_done);
    wait_msgs(2);
    chk(msgs.size() == 2 && msgs[1].addr == kind_addr(hop(2), KIND_FINISH), "tail sends Finish");
    repeat (2) @(negedge clk);
    chk(!busy && n_done == 1, "tail returns to idle without task_done");
    msgs.delete();

    // ---- 3: middle node, with a local task waiting behind a pending cfg ----
    c = '{task_id: 8'h43, prev_hop: hop(2), self_hop: hop(7), next_hop: hop(5), size: 32'd640, dse: pat(6)};
    td.kind = TASK_LOCAL;
    fork
      send_cfg(REQ_WRITE, c);
      begin
        @(negedge clk); task_valid = 1;
        #1; chk(!task_ready, "local task taken while a cfg is pending");
      end
    join
    repeat (6) @(negedge clk);
    chk(msgs.size() == 0, "middle node grants before its successor");
    pulse(grant);
    wait_msgs(1);
    chk(msgs.size() == 1 && msgs[0].addr == kind_addr(hop(2), KIND_GRANT), "middle node forwards Grant");
    repeat (3) @(negedge clk);
    chk(n_wr_start == 2 && n_tx_start == 2 && mode_at_start == SW_CW, "middle node in ChainWrite mode");
    chk(tx_addr_at == kind_addr(hop(5), KIND_DATA) && tx_beats_at == 10, "middle node forwards to its next hop");
    pulse(rx_valid);
    pulse(finish);
    pulse(wr_done);
    repeat (4) @(negedge clk);
    chk(msgs.size() == 1, "Finish forwarded before the data were sent on");
    pulse(tx_done);
    wait_msgs(2);
    chk(msgs.size() == 2 && msgs[1].addr == kind_addr(hop(2), KIND_FINISH), "middle node forwards Finish");
    msgs.delete();

    // ---- 6: the waiting local copy runs now ----
    td.task_id = 8'h60; td.rd_dse = pat(2); td.wr_dse = pat(8);
    while (!task_ready) @(negedge clk);
    @(negedge clk); task_valid = 0;
    repeat (3) @(negedge clk);
    chk(n_rd_start == 2 && n_wr_start == 3 && mode_at_start == SW_LOCAL, "local copy starts both engines");
    chk(rd_cfg_at == pat(2) && wr_cfg_at == pat(8), "local copy patterns");
    pulse(rd_done);
    chk(busy, "local copy ends before the write engine");
    pulse(wr_done);
    repeat (3) @(negedge clk);
    chk(n_done == 2 && !busy && msgs.size() == 0, "local copy completes without messages");

    // ---- 4: data source of a remote read ----
    c = '{task_id: 8'h44, prev_hop: NO_HOP, self_hop: hop(7), next_hop: hop(1), size: 32'd128, dse: pat(4)};
    send_cfg(REQ_READ, c);
    repeat (4) @(negedge clk);
    chk(msgs.size() == 0 && n_rd_start == 2, "source waits for the Grant");
    pulse(grant);
    repeat (3) @(negedge clk);
    chk(n_rd_start == 3 && n_tx_start == 3 && mode_at_start == SW_READ && rd_cfg_at == pat(4), "source reads");
    chk(tx_addr_at == kind_addr(hop(1), KIND_DATA) && tx_beats_at == 2, "source sends to the reader");
    pulse(rd_done); pulse(tx_done);
    pulse(finish);
    repeat (2) @(negedge clk);
    chk(!busy && msgs.size() == 0 && n_done == 2, "source finishes quietly");

    // ---- 5: head of a read task ----
    td = '0; td.kind = TASK_READ; td.task_id = 8'h50; td.n_dst = 1; td.size = 32'd256;
    td.wr_dse = pat(3); td.dst[0] = '{hop(6), pat(7)};
    @(negedge clk); task_valid = 1;
    @(negedge clk); task_valid = 0;
    wait_msgs(NF + 1);
    c = decode(0);
    chk(msgs[0].addr == kind_addr(hop(6), KIND_CFG) && msgs[0].data[DATA_W-1] == REQ_READ, "read-type cfg");
    chk(c.next_hop == hop(7) && c.prev_hop == NO_HOP && c.dse == pat(7), "read cfg fields");
    chk(msgs[NF].addr == kind_addr(hop(6), KIND_GRANT), "reader grants the source");
    repeat (3) @(negedge clk);
    chk(n_wr_start == 4 && mode_at_start == SW_WRITE && wr_cfg_at == pat(3), "reader writes");
    pulse(rx_valid);
    pulse(wr_done);
    wait_msgs(NF + 2);
    chk(msgs[NF+1].addr == kind_addr(hop(6), KIND_FINISH), "reader sends Finish");
    repeat (2) @(negedge clk);
    chk(n_done == 3 && !busy, "read task done");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
