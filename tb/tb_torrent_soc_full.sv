// tb_torrent_soc_full: the whole design at its default size, running the
// Chainwrite latency workload.
//
// torrent_soc is instantiated with no parameter overrides: twenty clusters
// with 1 MB of 32-bank memory each, 512-bit beats, 16-beat bursts and
// single-frame cfgs. A behavioural crossbar stands in for the network on
// chip. Cluster 0's memory is filled with 64 KB of known data through its
// external port; then cluster 0 copies those 64 KB with one Chainwrite to
// 1, 2, ... 8 destinations (clusters 1..k, each into its own region, so no
// run can pass on the data of an earlier one). For every run, every fourth
// beat of every destination is read back and compared with the source, and
// the latency reported by the initiator's cycle counter is printed. The
// 3-destination run is the size used for the silicon measurement of the
// design. Checks: the data; 64 KB to one destination in at most
// 1024 beats + 200 cycles (one 64-byte beat per cycle while streaming);
// latency grows with every added destination, by at most 300 cycles each,
// so eight destinations cost far less than eight separate copies.
// The experiment (64 KB to 1-8 destinations) is the published configuration-overhead measurement; the crossbar stands in for the mesh NoC, so absolute cycle counts differ from a mesh.
module tb_torrent_soc_full;
  import torrent_pkg::*;

  localparam int unsigned N      = 20;
  localparam int unsigned BYTES  = 65536;
  localparam int unsigned BEATS  = BYTES / BEAT_B;
  localparam int unsigned MAXK   = 8;

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

  torrent_soc dut (
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

  // read back every fourth beat of a destination
  task automatic check_sampled(input string what, input int scl, input dse_cfg_t scfg,
                               input int dcl, input dse_cfg_t dcfg, input int unsigned beats);
    int bad;
    logic [63:0] d;
    bad = 0;
    for (int unsigned j = 0; j < beats; j += 4) begin
      for (int ch = 0; ch < NC; ch++) begin
        mem_read(dcl, addr_of(dcfg, j, ch), d);
        checks++;
        if (d !== pattern(scl, addr_of(scfg, j, ch))) begin
          failures++;
          bad++;
          if (bad < 4) $display("FAIL %s: beat %0d ch %0d", what, j, ch);
        end
      end
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    task_desc_t t;
    int unsigned cyc [1:MAXK];
    task_d = '0; task_valid = '0; ext_req = '0; ext_req_data = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    fill(0, 0, BYTES);
    for (int k = 1; k <= MAXK; k++) begin
      t = new_task(TASK_WRITE, k, BYTES);
      t.n_dst = NDST_W'(k);
      t.rd_dse = lin(0, BEATS);
      for (int d = 0; d < k; d++) t.dst[d] = '{node_base(16'(d + 1)), lin(k * BYTES, BEATS)};
      start_task(0, t);
      wait_done(0, cyc[k]);
      repeat (10) @(posedge clk);
      checks++;
      if (busy != '0) begin failures++; $display("FAIL: a Torrent stays busy after run %0d", k); end
      for (int d = 0; d < k; d++) check_sampled($sformatf("CW%0d dst %0d", k, d + 1), 0, t.rd_dse, d + 1, t.dst[d].dse, BEATS);
      $display("Chainwrite 64 KB to %0d destination(s): %0d cycles", k, cyc[k]);
    end
    checks++;
    if (cyc[1] > BEATS + 200) begin failures++; $display("FAIL: 64 KB P2P copy took %0d cycles", cyc[1]); end
    for (int k = 2; k <= MAXK; k++) begin
      checks++;
      if (cyc[k] <= cyc[k-1] || cyc[k] > cyc[k-1] + 300) begin
        failures++; $display("FAIL: destination %0d added %0d cycles", k, cyc[k] - cyc[k-1]);
      end
    end
    $display("average cost of one more destination: %0d cycles", (cyc[MAXK] - cyc[1]) / (MAXK - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
