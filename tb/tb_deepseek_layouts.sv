// tb_deepseek_layouts: the attention-layer data movements used to evaluate
// the design on a 3 x 3 cluster system, with a smaller number of rows.
//
// Each movement copies an M x N matrix of 8-bit elements from cluster 0 and
// changes its tiled layout on the way. A layout "MNMaNb" is read here as:
// the matrix is cut into a x b tiles, tiles are stored row of tiles after
// row of tiles, each tile row-major. With 8-bit elements one 8-element tile
// row is one 64-bit memory word. The movements (matrix shapes and layouts
// as evaluated; rows cut from 2048 / 4096 to M = 256 to keep the run short):
//   P1 QK^T  256 x 192  MNM16N8 -> MNM8N8    Chainwrite to 8 clusters
//   P2 SV    256 x 128  MNM16N8 -> MNM8N8    Chainwrite to 8 clusters
//   P3 KV    256 x 512  MNM16N8 -> MNM16N8   Chainwrite to 8 clusters
//   D1 QK^T  256 x 192  MNM16N8 -> MNM64N16  to 1 cluster
//   D2 SV    256 x 128  MNM16N8 -> MNM64N16  to 1 cluster
//   D3 KV    256 x 512  MNM16N8 -> MNM16N8   Chainwrite to 8 clusters
// The streaming engines do the layout change: the source and destination
// access patterns below are worked out for each pair of layouts, and they
// use at most four loop levels. The check does not use those patterns: every
// 64-bit word (row m, tile column t) is looked up in the destination through
// the destination layout's own address formula and compared with the word
// at the source layout's address. The last destination of every chain is
// checked completely, the others at every 16th word. The latency and the
// P2MP efficiency (destinations x beats / cycles) of each movement are
// printed.
// The layout reading and the reduced row count are this testbench's
// choices; matrix widths, layouts and destination counts follow the
// evaluated workloads.
module tb_deepseek_layouts;
  import torrent_pkg::*;

  localparam int unsigned N = 9;
  localparam int unsigned M = 256;

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

  torrent_soc #(.NUM_CLUSTERS (N)) dut (
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

  // ---------------- layouts: byte address of word (row m, tile column t of 8) ----------------
  typedef enum int {L16N8, L8N8, L64N16} layout_e;
  function automatic int unsigned lay(input layout_e l, input int unsigned base, input int unsigned cols,
                                      input int unsigned m, input int unsigned t);
    unique case (l)
      L16N8:  return base + ((m / 16) * (cols / 8) + t) * 128 + (m % 16) * 8;
      L8N8:   return base + ((m / 8) * (cols / 8) + t) * 64 + (m % 8) * 8;
      default: return base + ((m / 64) * (cols / 16) + t / 2) * 1024 + (m % 64) * 16 + (t % 2) * 8;
    endcase
  endfunction

  function automatic dse_cfg_t pat(input int unsigned base, input int unsigned sstride,
                                   input int unsigned b0, input int unsigned s0, input int unsigned b1,
                                   input int unsigned s1, input int unsigned b2, input int unsigned s2,
                                   input int unsigned b3, input int unsigned s3);
    dse_cfg_t c;
    c.base = MADDR_W'(base); c.sstride = MADDR_W'(sstride);
    c.bound[0] = BOUND_W'(b0); c.tstride[0] = MADDR_W'(s0);
    c.bound[1] = BOUND_W'(b1); c.tstride[1] = MADDR_W'(s1);
    c.bound[2] = BOUND_W'(b2); c.tstride[2] = MADDR_W'(s2);
    c.bound[3] = BOUND_W'(b3); c.tstride[3] = MADDR_W'(s3);
    return c;
  endfunction

  localparam int unsigned SRC = 0, DST = 20'h40000;

  int unsigned task_no = 0;
  task automatic movement(input string name, input int unsigned cols, input layout_e dl, input int ndst);
    task_desc_t t;
    dse_cfg_t rp, wp;
    int unsigned beats, cyc, tc;
    logic [63:0] d;
    int bad;
    beats = M * cols / BEAT_B;
    tc = cols / 8;
    unique case (dl)
      L8N8: begin
        // a destination beat is one 8 x 8 tile: rows c = 0..7 of tile (mt8, t)
        rp = pat(SRC, 8, tc, 128, 2, 64, M / 16, tc * 128, 1, 0);
        wp = pat(DST, 8, beats, BEAT_B, 1, 0, 1, 0, 1, 0);
      end
      L64N16: begin
        // a source beat is 8 rows of one 16 x 8 tile; rows land 16 bytes apart
        rp = pat(SRC, 8, 2, 64, 4, tc * 128, tc, 128, M / 64, 4 * tc * 128);
        wp = pat(DST, 16, 8, 128, 2, 8, cols / 16, 1024, M / 64, (cols / 16) * 1024);
      end
      default: begin
        rp = pat(SRC, 8, beats, BEAT_B, 1, 0, 1, 0, 1, 0);
        wp = pat(DST, 8, beats, BEAT_B, 1, 0, 1, 0, 1, 0);
      end
    endcase
    fill(0, SRC, M * cols);
    task_no++;
    t = new_task(TASK_WRITE, task_no, M * cols);
    t.n_dst = NDST_W'(ndst);
    t.rd_dse = rp;
    for (int k = 0; k < ndst; k++) t.dst[k] = '{node_base(16'(k + 1)), wp};
    start_task(0, t);
    wait_done(0, cyc);
    repeat (10) @(posedge clk);
    for (int k = 0; k < ndst; k++) begin
      bad = 0;
      for (int unsigned m = 0; m < M; m++) for (int unsigned c = 0; c < tc; c++) begin
        if (k == ndst - 1 || ((m * tc + c) % 16) == 0) begin
          mem_read(k + 1, lay(dl, DST, cols, m, c), d);
          checks++;
          if (d !== pattern(0, lay(L16N8, SRC, cols, m, c))) begin
            failures++; bad++;
            if (bad < 4) $display("FAIL %s dst %0d: row %0d tile col %0d", name, k + 1, m, c);
          end
        end
      end
    end
    $display("%s: %0d x %0d bytes to %0d cluster(s) in %0d cycles, P2MP efficiency %0d.%02d",
             name, M, cols, ndst, cyc, ndst * beats / cyc, (100 * ndst * beats / cyc) % 100);
    checks++;
    // bound: one beat per cycle, plus about one idle cycle per 16-beat burst
    // per link in the chain, plus a fixed set-up cost per hop
    if (cyc > beats + beats * (ndst + 1) / 16 + 150 + 10 * ndst) begin failures++; $display("FAIL %s: too slow", name); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    task_d = '0; task_valid = '0; ext_req = '0; ext_req_data = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    movement("P1 QKT", 192, L8N8, 8);
    movement("P2 SV",  128, L8N8, 8);
    movement("P3 KV",  512, L16N8, 8);
    movement("D1 QKT", 192, L64N16, 1);
    movement("D2 SV",  128, L64N16, 1);
    movement("D3 KV",  512, L16N8, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
