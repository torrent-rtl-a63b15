// torrent_soc: clusters of memory + Torrent, the top of this design.
//
// NUM_CLUSTERS clusters (20 by default, the 4x5-mesh system the Torrent was
// evaluated in). Each holds a cluster_mem (1 MB, 32 banks of 64 bit) and a
// Torrent whose 2*NC engine channels use memory ports 0..2*NC-1. Memory
// port 2*NC of every cluster is brought out (ext_*) for the parts of a
// cluster that are not built here, the cores and accelerators; the
// testbenches use it to load and inspect memory. Cluster i's Torrent
// answers at base address node_base(i) = i << 16. The NoC that carries
// the Torrents' AXI traffic is not part of this design: every Torrent's
// AXI master and slave are top-level ports, to be connected to an AXI
// interconnect that routes a write by address bits [31:16]. Tasks enter
// per cluster through task_* and complete with task_done_o / cycles_o.
module torrent_soc
  import torrent_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS = 20,
  parameter int unsigned MEM_BYTES    = 1048576,
  parameter int unsigned NBANK        = 32,
  parameter int unsigned FIFO_DEPTH   = 4,
  parameter int unsigned BURST_BEATS  = 16,
  parameter int unsigned CW_BUF_DEPTH = 0,
  parameter int unsigned FRAME_BODY_W = DATA_W - FHDR_W
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  // per-cluster task interface (from the cluster cores)
  input  task_desc_t [NUM_CLUSTERS-1:0]        task_i,
  input  logic       [NUM_CLUSTERS-1:0]        task_valid_i,
  output logic       [NUM_CLUSTERS-1:0]        task_ready_o,
  output logic       [NUM_CLUSTERS-1:0]        task_done_o,
  output logic       [NUM_CLUSTERS-1:0][31:0]  cycles_o,
  output logic       [NUM_CLUSTERS-1:0]        busy_o,
  // per-cluster external memory port (cores / accelerators)
  input  logic       [NUM_CLUSTERS-1:0]        ext_req_i,
  input  mem_req_t   [NUM_CLUSTERS-1:0]        ext_req_data_i,
  output logic       [NUM_CLUSTERS-1:0]        ext_gnt_o,
  output logic       [NUM_CLUSTERS-1:0]        ext_rvalid_o,
  output logic       [NUM_CLUSTERS-1:0][BANK_W-1:0] ext_rdata_o,
  // per-cluster AXI master, to the interconnect
  output axi_aw_t    [NUM_CLUSTERS-1:0]        m_aw_o,
  output logic       [NUM_CLUSTERS-1:0]        m_aw_valid_o,
  input  logic       [NUM_CLUSTERS-1:0]        m_aw_ready_i,
  output axi_w_t     [NUM_CLUSTERS-1:0]        m_w_o,
  output logic       [NUM_CLUSTERS-1:0]        m_w_valid_o,
  input  logic       [NUM_CLUSTERS-1:0]        m_w_ready_i,
  input  axi_b_t     [NUM_CLUSTERS-1:0]        m_b_i,
  input  logic       [NUM_CLUSTERS-1:0]        m_b_valid_i,
  output logic       [NUM_CLUSTERS-1:0]        m_b_ready_o,
  // per-cluster AXI slave, from the interconnect
  input  axi_aw_t    [NUM_CLUSTERS-1:0]        s_aw_i,
  input  logic       [NUM_CLUSTERS-1:0]        s_aw_valid_i,
  output logic       [NUM_CLUSTERS-1:0]        s_aw_ready_o,
  input  axi_w_t     [NUM_CLUSTERS-1:0]        s_w_i,
  input  logic       [NUM_CLUSTERS-1:0]        s_w_valid_i,
  output logic       [NUM_CLUSTERS-1:0]        s_w_ready_o,
  output axi_b_t     [NUM_CLUSTERS-1:0]        s_b_o,
  output logic       [NUM_CLUSTERS-1:0]        s_b_valid_o,
  input  logic       [NUM_CLUSTERS-1:0]        s_b_ready_i
);
  localparam int unsigned NP = 2 * NC + 1;

  for (genvar i = 0; i < NUM_CLUSTERS; i++) begin : g_cluster
    logic     [NP-1:0]             req, gnt, rvalid;
    mem_req_t [NP-1:0]             req_data;
    logic     [NP-1:0][BANK_W-1:0] rdata;

    assign req[NP-1]      = ext_req_i[i];
    assign req_data[NP-1] = ext_req_data_i[i];
    assign ext_gnt_o[i]    = gnt[NP-1];
    assign ext_rvalid_o[i] = rvalid[NP-1];
    assign ext_rdata_o[i]  = rdata[NP-1];

    cluster_mem #(.MEM_BYTES(MEM_BYTES), .NBANK(NBANK), .NP(NP)) i_mem (
      .clk_i, .rst_ni,
      .req_i      (req),
      .req_data_i (req_data),
      .gnt_o      (gnt),
      .rvalid_o   (rvalid),
      .rdata_o    (rdata)
    );

    torrent #(
      .FIFO_DEPTH   (FIFO_DEPTH),
      .BURST_BEATS  (BURST_BEATS),
      .CW_BUF_DEPTH (CW_BUF_DEPTH),
      .FRAME_BODY_W (FRAME_BODY_W)
    ) i_torrent (
      .clk_i, .rst_ni,
      .self_hop_i     (node_base(16'(i))),
      .task_i         (task_i[i]),
      .task_valid_i   (task_valid_i[i]),
      .task_ready_o   (task_ready_o[i]),
      .task_done_o    (task_done_o[i]),
      .cycles_o       (cycles_o[i]),
      .busy_o         (busy_o[i]),
      .mem_req_o      (req[2*NC-1:0]),
      .mem_req_data_o (req_data[2*NC-1:0]),
      .mem_gnt_i      (gnt[2*NC-1:0]),
      .mem_rvalid_i   (rvalid[2*NC-1:0]),
      .mem_rdata_i    (rdata[2*NC-1:0]),
      .m_aw_o       (m_aw_o[i]),
      .m_aw_valid_o (m_aw_valid_o[i]),
      .m_aw_ready_i (m_aw_ready_i[i]),
      .m_w_o        (m_w_o[i]),
      .m_w_valid_o  (m_w_valid_o[i]),
      .m_w_ready_i  (m_w_ready_i[i]),
      .m_b_i        (m_b_i[i]),
      .m_b_valid_i  (m_b_valid_i[i]),
      .m_b_ready_o  (m_b_ready_o[i]),
      .s_aw_i       (s_aw_i[i]),
      .s_aw_valid_i (s_aw_valid_i[i]),
      .s_aw_ready_o (s_aw_ready_o[i]),
      .s_w_i        (s_w_i[i]),
      .s_w_valid_i  (s_w_valid_i[i]),
      .s_w_ready_o  (s_w_ready_o[i]),
      .s_b_o        (s_b_o[i]),
      .s_b_valid_o  (s_b_valid_o[i]),
      .s_b_ready_i  (s_b_ready_i[i])
    );
  end
endmodule
