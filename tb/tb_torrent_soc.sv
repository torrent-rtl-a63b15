// tb_torrent_soc: end-to-end test of torrent_soc on a behavioural crossbar.
//
// Five clusters with 64 KB memories, cfg frames of 200 body bits (so each
// cfg takes two frames) and 4-beat bursts (so every transfer is split into
// several bursts). Every cluster memory is filled with a known pattern,
// word = f(cluster, byte address), through the external memory ports; then
// tasks are run and every destination word is read back and compared with
// the source word the task's two access patterns map onto it:
//   1 local loopback with a 2-D reshuffle on cluster 0,
//   2 point-to-point write 0 -> 1,
//   3 Chainwrite 0 -> 3, 1, 4, 2 with a different pattern per destination,
//   4 point-to-point read, cluster 2 pulls from cluster 4,
//   5 two initiators at once (1 -> {2, 3} and 4 -> 3), so a cfg reaches a
//     busy Torrent and must wait.
// It counts how often each mechanism happened (multi-frame cfg, Grant
// forwarded, data forwarded, Finish forwarded, cfg held back by a busy
// Torrent, bank conflict, multi-burst transfer, each switch mode) and
// counts a failure for any that never did. The P2P write must take fewer
// cycles than the Chainwrite, and one beat per cycle is checked as a
// bound on the streaming phase.
// Cluster count and memory size are reduced for speed; the mechanisms counted are those of the published design plus this implementation's cfg hold-back.
module tb_torrent_soc;
  import torrent_pkg::*;

  localparam int unsigned N         = 5;
  localparam int unsigned MEM_BYTES = 65536;
  localparam int unsigned FBODY     = 200;
  localparam int unsigned BURST     = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  task_desc_t [N-1:0]        task_d;
  logic       [N-1:0]        task_valid, task_ready, task_done, busy;
  logic       [N-1:0][31:0]  cycles;
  logic       [N-1:0]        ext_req, ext_gnt, ext_rvalid;
  mem_req_t   [N-1:0]        ext_req_data;
  logic       [N-1:0][BANK_W-1:0] ext_rdata;
  axi_aw_t [N-1:0] m_aw, s_aw;
  axi_w_t  [N-1:0] m_w, s_w;
  axi_b_t  [N-1:0] m_b, s_b;
  logic [N-1:0] m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  logic [N-1:0] s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;

  torrent_soc #(
    .NUM_CLUSTERS (N),
    .MEM_BYTES    (MEM_BYTES),
    .BURST_BEATS  (BURST),
    .FRAME_BODY_W (FBODY)
  ) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .task_i (task_d), .task_valid_i (task_valid), .task_ready_o (task_ready),
    .task_done_o (task_done), .cycles_o (cycles), .busy_o (busy),
    .ext_req_i (ext_req), .ext_req_data_i (ext_req_data), .ext_gnt_o (ext_gnt),
    .ext_rvalid_o (ext_rvalid), .ext_rdata_o (ext_rdata),
    .m_aw_o (m_aw), .m_aw_valid_o (m_aw_valid), .m_aw_ready_i (m_aw_ready),
    .m_w_o (m_w), .m_w_valid_o (m_w_valid), .m_w_ready_i (m_w_ready),
    .m_b_i (m_b), .m_b_valid_i (m_b_valid), .m_b_ready_o (m_b_ready),
    .s_aw_i (s_aw), .s_aw_valid_i (s_aw_valid), .s_aw_ready_o (s_aw_ready),
    .s_w_i (s_w), .s_w_valid_i (s_w_valid), .s_w_ready_o (s_w_ready),
    .s_b_o (s_b), .s_b_valid_o (s_b_valid), .s_b_ready_i (s_b_ready)
  );

  noc_model #(.N(N)) i_noc (
    .clk_i (clk), .rst_ni (rst_n),
    .m_aw_i (m_aw), .m_aw_valid_i (m_aw_valid), .m_aw_ready_o (m_aw_ready),
    .m_w_i (m_w), .m_w_valid_i (m_w_valid), .m_w_ready_o (m_w_ready),
    .m_b_o (m_b), .m_b_valid_o (m_b_valid), .m_b_ready_i (m_b_ready),
    .s_aw_o (s_aw), .s_aw_valid_o (s_aw_valid), .s_aw_ready_i (s_aw_ready),
    .s_w_o (s_w), .s_w_valid_o (s_w_valid), .s_w_ready_i (s_w_ready),
    .s_b_i (s_b), .s_b_valid_i (s_b_valid), .s_b_ready_o (s_b_ready)
  );

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  function automatic logic [63:0] pattern(input int cl, input int unsigned a);
    return {8'(cl + 1), 24'(a), 32'(a * 32'h9E3779B1) ^ 32'(cl * 7919)};
  endfunction

  function automatic dse_cfg_t lin(input int unsigned base, input int unsigned beats);
    dse_cfg_t c;
    c = '0;
    c.base = MADDR_W'(base);
    c.sstride = MADDR_W'(BANK_W / 8);
    c.bound[0] = BOUND_W'(beats);
    c.tstride[0] = MADDR_W'(BEAT_B);
    for (int d = 1; d < NDIM; d++) c.bound[d] = 1;
    return c;
  endfunction

  // 2-D pattern: beats written column-major (rows x cols of 64 B beats)
  function automatic dse_cfg_t tr2d(input int unsigned base, input int unsigned rows,
                                     input int unsigned cols);
    dse_cfg_t c;
    c = lin(base, rows);
    c.tstride[0] = MADDR_W'(BEAT_B * cols);
    c.bound[1] = BOUND_W'(cols);
    c.tstride[1] = MADDR_W'(BEAT_B);
    return c;
  endfunction

  // byte address of beat j, channel ch, independent of the RTL's AGU
  function automatic int unsigned addr_of(input dse_cfg_t c, input int unsigned j, input int ch);
    int unsigned a, r;
    a = c.base;
    r = j;
    for (int d = 0; d < NDIM; d++) begin
      int unsigned b;
      b = (c.bound[d] == 0) ? 1 : c.bound[d];
      a += (r % b) * c.tstride[d];
      r /= b;
    end
    a += ch * c.sstride;
    return a % (1 << MADDR_W);
  endfunction

  // ---------------- memory access through the external port ----------------
  // requests are driven after the falling edge and granted at a rising edge
  task automatic mem_write(input int cl, input int unsigned a, input logic [63:0] d);
    @(negedge clk);
    ext_req[cl] = 1'b1;
    ext_req_data[cl] = '{we: 1'b1, addr: MADDR_W'(a), wdata: d};
    #1;
    while (!ext_gnt[cl]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ext_req[cl] = 1'b0;
  endtask

  task automatic mem_read(input int cl, input int unsigned a, output logic [63:0] d);
    @(negedge clk);
    ext_req[cl] = 1'b1;
    ext_req_data[cl] = '{we: 1'b0, addr: MADDR_W'(a), wdata: '0};
    #1;
    while (!ext_gnt[cl]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 ext_req[cl] = 1'b0;
    d = ext_rdata[cl];
  endtask

  task automatic fill(input int cl, input int unsigned base, input int unsigned bytes);
    for (int unsigned a = base; a < base + bytes; a += 8) mem_write(cl, a, pattern(cl, a));
  endtask

  task automatic check_copy(input string what, input int scl, input dse_cfg_t scfg,
                            input int dcl, input dse_cfg_t dcfg, input int unsigned beats);
    int bad;
    logic [63:0] d;
    bad = 0;
    for (int unsigned j = 0; j < beats; j++) begin
      for (int ch = 0; ch < NC; ch++) begin
        mem_read(dcl, addr_of(dcfg, j, ch), d);
        checks++;
        if (d !== pattern(scl, addr_of(scfg, j, ch))) begin
          failures++;
          bad++;
          if (bad < 4) $display("FAIL %s: beat %0d ch %0d got %h want %h", what, j, ch, d,
                                pattern(scl, addr_of(scfg, j, ch)));
        end
      end
    end
    $display("%s: %0d beats checked, %0d wrong", what, beats, bad);
  endtask

  task automatic start_task(input int cl, input task_desc_t t);
    @(negedge clk);
    task_d[cl] = t;
    task_valid[cl] = 1'b1;
    #1;
    while (!task_ready[cl]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 task_valid[cl] = 1'b0;
  endtask

  task automatic wait_done(input int cl, output int unsigned cyc);
    do @(posedge clk); while (!task_done[cl]);
    @(negedge clk);
    cyc = cycles[cl];
  endtask

  function automatic task_desc_t new_task(input task_kind_e k, input int id, input int unsigned bytes);
    task_desc_t t;
    t = '0;
    t.kind = k;
    t.task_id = TASK_W'(id);
    t.size = SIZE_W'(bytes);
    t.n_dst = 1;
    return t;
  endfunction

  // ---------------- mechanism counters ----------------
  // encodings of the controller states watched (their order in torrent_ctrl)
  localparam int ST_RECV_CFG = 7, ST_RECV_FWD_GRANT = 12, ST_RECV_FWD_FINISH = 14;
  int n_multiframe, n_fwd_grant, n_fwd_data, n_fwd_finish, n_cfg_held, n_bank_conflict;
  int n_multi_burst, n_mode[4];
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (32'(dut.g_cluster[i].i_torrent.i_ctrl.state_q) == ST_RECV_CFG &&
          dut.g_cluster[i].i_torrent.i_ctrl.cfg_valid_i) n_multiframe++;
      if (32'(dut.g_cluster[i].i_torrent.i_ctrl.state_q) == ST_RECV_FWD_GRANT &&
          dut.g_cluster[i].i_torrent.i_ctrl.msg_ready_i) n_fwd_grant++;
      if (32'(dut.g_cluster[i].i_torrent.i_ctrl.state_q) == ST_RECV_FWD_FINISH &&
          dut.g_cluster[i].i_torrent.i_ctrl.msg_ready_i) n_fwd_finish++;
      if (dut.g_cluster[i].i_torrent.i_switch.mode_i == SW_CW &&
          dut.g_cluster[i].i_torrent.i_switch.p4_valid_i &&
          dut.g_cluster[i].i_torrent.i_switch.p4_ready_o) n_fwd_data++;
      if (s_aw_valid[i] && !s_aw_ready[i] && s_aw[i].addr[KIND_LSB +: 2] == KIND_CFG) n_cfg_held++;
      if (|(dut.g_cluster[i].i_torrent.mem_req_o & ~dut.g_cluster[i].i_torrent.mem_gnt_i))
        n_bank_conflict++;
      if (m_aw_valid[i] && m_aw_ready[i] && m_aw[i].addr[KIND_LSB +: 2] == KIND_DATA &&
          m_aw[i].addr[KIND_LSB-1:0] != '0) n_multi_burst++;
      if (dut.g_cluster[i].i_torrent.i_switch.p1_valid_i | dut.g_cluster[i].i_torrent.i_switch.p4_valid_i)
        n_mode[dut.g_cluster[i].i_torrent.i_switch.mode_i]++;
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    task_desc_t t;
    int unsigned cyc_p2p, cyc_cw, cyc, c1, c2;
    dse_cfg_t src, d0, d1, d2, d3;
    int chain [4] = '{3, 1, 4, 2};

    task_valid = '0;
    task_d = '0;
    ext_req = '0;
    ext_req_data = '0;
    n_multiframe = 0; n_fwd_grant = 0; n_fwd_data = 0; n_fwd_finish = 0;
    n_cfg_held = 0; n_bank_conflict = 0; n_multi_burst = 0;
    for (int m = 0; m < 4; m++) n_mode[m] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    for (int cl = 0; cl < N; cl++) fill(cl, 0, 4096);
    $display("memories filled at %0t", $time);

    // 1: local loopback with reshuffle, 16 beats
    src = lin(0, 16);
    d0  = tr2d(16'h4000, 4, 4);
    t = new_task(TASK_LOCAL, 1, 16 * BEAT_B);
    t.rd_dse = src;
    t.wr_dse = d0;
    start_task(0, t);
    wait_done(0, cyc);
    $display("local copy: %0d cycles", cyc);
    check_copy("local", 0, src, 0, d0, 16);

    // 2: P2P write 0 -> 1, 32 beats
    src = lin(16'h0800, 32);
    d0  = lin(16'h8000, 32);
    t = new_task(TASK_WRITE, 2, 32 * BEAT_B);
    t.rd_dse = src;
    t.dst[0] = '{hop: node_base(16'd1), dse: d0};
    start_task(0, t);
    wait_done(0, cyc_p2p);
    $display("P2P write: %0d cycles", cyc_p2p);
    check_copy("p2p write", 0, src, 1, d0, 32);
    checks++;
    if (cyc_p2p < 32) begin
      failures++;
      $display("FAIL: P2P write of 32 beats took %0d cycles, below one beat per cycle", cyc_p2p);
    end

    // 3: Chainwrite 0 -> 3, 1, 4, 2
    src = lin(0, 32);
    d0  = lin(16'hA000, 32);
    d1  = tr2d(16'hB000, 8, 4);
    d2  = lin(16'hA800, 32);
    d3  = tr2d(16'hC800, 4, 8);  // beats 128 B apart, channels two words apart
    d3.tstride[0] = MADDR_W'(128 * 8);
    d3.tstride[1] = MADDR_W'(128);
    d3.sstride    = MADDR_W'(16);
    t = new_task(TASK_WRITE, 3, 32 * BEAT_B);
    t.n_dst = 4;
    t.rd_dse = src;
    t.dst[0] = '{hop: node_base(16'(chain[0])), dse: d0};
    t.dst[1] = '{hop: node_base(16'(chain[1])), dse: d1};
    t.dst[2] = '{hop: node_base(16'(chain[2])), dse: d2};
    t.dst[3] = '{hop: node_base(16'(chain[3])), dse: d3};
    start_task(0, t);
    wait_done(0, cyc_cw);
    $display("Chainwrite to 4 destinations: %0d cycles", cyc_cw);
    check_copy("cw dst0", 0, src, chain[0], d0, 32);
    check_copy("cw dst1", 0, src, chain[1], d1, 32);
    check_copy("cw dst2", 0, src, chain[2], d2, 32);
    check_copy("cw dst3", 0, src, chain[3], d3, 32);
    checks++;
    if (!(cyc_cw > cyc_p2p && cyc_cw < 4 * cyc_p2p)) begin
      failures++;
      $display("FAIL: Chainwrite to 4 took %0d cycles, P2P %0d: expected between 1x and 4x",
               cyc_cw, cyc_p2p);
    end

    // 4: P2P read, cluster 2 pulls 16 beats from cluster 4
    src = tr2d(16'h0000, 4, 4);
    d0  = lin(16'hE000, 16);
    t = new_task(TASK_READ, 4, 16 * BEAT_B);
    t.wr_dse = d0;
    t.dst[0] = '{hop: node_base(16'd4), dse: src};
    start_task(2, t);
    wait_done(2, cyc);
    $display("P2P read: %0d cycles", cyc);
    check_copy("p2p read", 4, src, 2, d0, 16);

    // 5: two initiators at once; cluster 3 is wanted by both
    src = lin(16'h0400, 32);
    d0  = lin(16'hF000, 32);
    d1  = lin(16'hF800, 32);
    t = new_task(TASK_WRITE, 5, 32 * BEAT_B);
    t.rd_dse = src;
    t.n_dst = 2;
    t.dst[0] = '{hop: node_base(16'd2), dse: d0};
    t.dst[1] = '{hop: node_base(16'd3), dse: d1};
    fork
      begin
        start_task(1, t);
        wait_done(1, c1);
      end
      begin
        task_desc_t t2;
        t2 = new_task(TASK_WRITE, 6, 32 * BEAT_B);
        t2.rd_dse = lin(16'h0800, 32);
        t2.dst[0] = '{hop: node_base(16'd3), dse: lin(16'h7000, 32)};
        start_task(4, t2);
        wait_done(4, c2);
      end
    join
    $display("concurrent tasks: %0d and %0d cycles", c1, c2);
    check_copy("conc 1->2", 1, src, 2, d0, 32);
    check_copy("conc 1->3", 1, src, 3, d1, 32);
    check_copy("conc 4->3", 4, lin(16'h0800, 32), 3, lin(16'h7000, 32), 32);

    // ---------------- mechanism coverage ----------------
    $display("mechanisms: multi-frame cfg %0d, Grant fwd %0d, data fwd %0d, Finish fwd %0d,",
             n_multiframe, n_fwd_grant, n_fwd_data, n_fwd_finish);
    $display("            cfg held by busy Torrent %0d, bank conflict %0d, later bursts %0d",
             n_cfg_held, n_bank_conflict, n_multi_burst);
    $display("            mode LOCAL %0d READ %0d WRITE %0d CW %0d",
             n_mode[SW_LOCAL], n_mode[SW_READ], n_mode[SW_WRITE], n_mode[SW_CW]);
    checks += 11;
    if (n_multiframe == 0)    begin failures++; $display("FAIL: no multi-frame cfg"); end
    if (n_fwd_grant == 0)     begin failures++; $display("FAIL: no Grant forwarded"); end
    if (n_fwd_data == 0)      begin failures++; $display("FAIL: no data forwarded"); end
    if (n_fwd_finish == 0)    begin failures++; $display("FAIL: no Finish forwarded"); end
    if (n_cfg_held == 0)      begin failures++; $display("FAIL: no cfg held back"); end
    if (n_bank_conflict == 0) begin failures++; $display("FAIL: no bank conflict"); end
    if (n_multi_burst == 0)   begin failures++; $display("FAIL: no multi-burst transfer"); end
    for (int m = 0; m < 4; m++)
      if (n_mode[m] == 0) begin failures++; $display("FAIL: switch mode %0d never used", m); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
