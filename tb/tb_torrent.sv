// tb_torrent: two complete Torrents, wired back to back (each one's AXI
// master drives the other's slave), each with a behavioural cluster memory
// that grants requests at random and answers reads one cycle later. Every
// 64-bit word that was never written reads as a value computed from the
// node and its address, so the expected result of any copy is known
// without running one. Scenarios: a local copy, a write from node A to
// node B, a read by A of B's memory with a 2-D pattern at the destination,
// and a write from B to A. After each task the destination words are
// compared with the pattern and words outside the destination must be
// untouched; task_done must come once, and with an always-granting memory
// a 64-beat transfer must run close to one beat per cycle.
// The memory model and crossbar-free wiring are test choices; the behaviour checked is the published P2P copy.
module tb_torrent;
  import torrent_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task_desc_t [1:0] td;
  logic [1:0] task_valid, task_ready, task_done, busy;
  logic [1:0][31:0] cycles;
  logic     [1:0][2*NC-1:0] req, gnt, rvalid;
  mem_req_t [1:0][2*NC-1:0] rq;
  logic     [1:0][2*NC-1:0][BANK_W-1:0] rdata;
  axi_aw_t [1:0] aw; axi_w_t [1:0] w; axi_b_t [1:0] b;
  logic [1:0] aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  int gnt_pct = 100;
  logic [63:0] mem [2][logic [MADDR_W-1:0]];
  int checks = 0, failures = 0;

  for (genvar n = 0; n < 2; n++) begin : g_node
    torrent dut (
      .clk_i (clk), .rst_ni (rst_n), .self_hop_i (node_base(16'(n + 1))),
      .task_i (td[n]), .task_valid_i (task_valid[n]), .task_ready_o (task_ready[n]),
      .task_done_o (task_done[n]), .cycles_o (cycles[n]), .busy_o (busy[n]),
      .mem_req_o (req[n]), .mem_req_data_o (rq[n]), .mem_gnt_i (gnt[n]),
      .mem_rvalid_i (rvalid[n]), .mem_rdata_i (rdata[n]),
      // master n -> slave 1-n; B of slave 1-n -> master n
      .m_aw_o (aw[n]), .m_aw_valid_o (aw_valid[n]), .m_aw_ready_i (aw_ready[1-n]),
      .m_w_o (w[n]), .m_w_valid_o (w_valid[n]), .m_w_ready_i (w_ready[1-n]),
      .m_b_i (b[1-n]), .m_b_valid_i (b_valid[1-n]), .m_b_ready_o (b_ready[n]),
      .s_aw_i (aw[1-n]), .s_aw_valid_i (aw_valid[1-n]), .s_aw_ready_o (aw_ready[n]),
      .s_w_i (w[1-n]), .s_w_valid_i (w_valid[1-n]), .s_w_ready_o (w_ready[n]),
      .s_b_o (b[n]), .s_b_valid_o (b_valid[n]), .s_b_ready_i (b_ready[1-n]));
  end

  function automatic logic [63:0] init_word(input int n, input logic [MADDR_W-1:0] a);
    return {8'(n + 1), 24'(a), 32'(a) * 32'h9E37_79B1};
  endfunction
  function automatic logic [63:0] rd(input int n, input logic [MADDR_W-1:0] a);
    return mem[n].exists(a) ? mem[n][a] : init_word(n, a);
  endfunction

  // behavioural memories
  always @(negedge clk) for (int n = 0; n < 2; n++) for (int p = 0; p < 2 * NC; p++)
    gnt[n][p] = ($urandom % 100) < gnt_pct;
  always @(posedge clk) begin
    for (int n = 0; n < 2; n++) for (int p = 0; p < 2 * NC; p++) begin
      rvalid[n][p] <= req[n][p] & gnt[n][p] & ~rq[n][p].we;
      rdata[n][p]  <= rd(n, rq[n][p].addr);
      if (req[n][p] && gnt[n][p] && rq[n][p].we) mem[n][rq[n][p].addr] = rq[n][p].wdata;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dse_cfg_t lin(input logic [MADDR_W-1:0] base, input int beats);
    dse_cfg_t d;
    d = '0; d.base = base; d.sstride = 8; d.bound[0] = 16'(beats); d.tstride[0] = BEAT_B;
    return d;
  endfunction
  // word address of channel c of beat j
  function automatic logic [MADDR_W-1:0] addr_of(input dse_cfg_t d, input int j, input int c);
    int unsigned a, r;
    a = d.base; r = j;
    for (int k = 0; k < NDIM; k++) begin
      int unsigned bd;
      bd = (d.bound[k] == 0) ? 1 : d.bound[k];
      a += (r % bd) * d.tstride[k];
      r /= bd;
    end
    return MADDR_W'(a + c * d.sstride);
  endfunction

  task automatic run(input int n, input task_desc_t t, output int cyc);
    int dones;
    @(negedge clk);
    td[n] = t; task_valid[n] = 1;
    #1;
    while (!task_ready[n]) begin @(negedge clk); #1; end
    @(negedge clk);
    task_valid[n] = 0;
    dones = 0; cyc = 0;
    while (dones == 0 && cyc < 20000) begin
      #1; if (task_done[n]) dones++;
      @(negedge clk); cyc++;
    end
    repeat (20) begin #1; if (task_done[n]) dones++; @(negedge clk); end
    checks++;
    if (dones != 1) begin failures++; $display("FAIL: %0d done pulses", dones); end
    checks++;
    if (busy != '0) begin failures++; $display("FAIL: a Torrent stays busy"); end
    cyc = cycles[n];
  endtask

  // compare beats: destination (node dn, pattern dd) == source (node sn, pattern sd)
  task automatic compare(input int dn, input dse_cfg_t dd, input int sn, input dse_cfg_t sd, input int beats,
                         input logic [MADDR_W-1:0] guard);
    for (int j = 0; j < beats; j++) for (int c = 0; c < NC; c++) begin
      checks++;
      if (rd(dn, addr_of(dd, j, c)) !== init_word(sn, addr_of(sd, j, c))) begin
        failures++; $display("FAIL node %0d beat %0d ch %0d", dn, j, c);
      end
    end
    checks++;
    if (mem[dn].exists(guard)) begin failures++; $display("FAIL: word written outside the destination"); end
  endtask

  initial begin
    task_desc_t t;
    dse_cfg_t d2;
    int cyc;
    td = '0; task_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // local copy on A
    t = '0; t.kind = TASK_LOCAL; t.task_id = 1; t.n_dst = 1; t.size = 32 * BEAT_B;
    t.rd_dse = lin(20'h00000, 32); t.wr_dse = lin(20'h08000, 32);
    run(0, t, cyc);
    compare(0, t.wr_dse, 0, t.rd_dse, 32, 20'h08000 + 32 * BEAT_B);
    $display("local copy, 32 beats: %0d cycles", cyc);

    // A writes 64 beats into B, memory always grants
    t = '0; t.kind = TASK_WRITE; t.task_id = 2; t.n_dst = 1; t.size = 64 * BEAT_B;
    t.rd_dse = lin(20'h10000, 64); t.dst[0] = '{node_base(16'd2), lin(20'h40000, 64)};
    run(0, t, cyc);
    compare(1, t.dst[0].dse, 0, t.rd_dse, 64, 20'h40000 + 64 * BEAT_B);
    $display("write A->B, 64 beats: %0d cycles", cyc);
    checks++;
    if (cyc > 64 + 64 / 16 + 40) begin failures++; $display("FAIL: write too slow"); end

    // A reads 16 beats of B into a 2-D destination, random grants
    gnt_pct = 60;
    d2 = '0; d2.base = 20'h0C000; d2.sstride = 1024; d2.bound[0] = 4; d2.tstride[0] = 8;
    d2.bound[1] = 4; d2.tstride[1] = 8192;
    t = '0; t.kind = TASK_READ; t.task_id = 3; t.n_dst = 1; t.size = 16 * BEAT_B;
    t.wr_dse = d2; t.dst[0] = '{node_base(16'd2), lin(20'h20000, 16)};
    run(0, t, cyc);
    compare(0, d2, 1, t.dst[0].dse, 16, 20'h0C000 + 32);
    $display("read A<-B, 16 beats: %0d cycles", cyc);

    // B writes 20 beats into A (a partial last burst)
    t = '0; t.kind = TASK_WRITE; t.task_id = 4; t.n_dst = 1; t.size = 20 * BEAT_B;
    t.rd_dse = lin(20'h30000, 20); t.dst[0] = '{node_base(16'd1), lin(20'h50000, 20)};
    run(1, t, cyc);
    compare(0, t.dst[0].dse, 1, t.rd_dse, 20, 20'h50000 + 20 * BEAT_B);
    $display("write B->A, 20 beats: %0d cycles", cyc);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
