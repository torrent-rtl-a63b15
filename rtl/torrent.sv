// torrent: one Torrent distributed-DMA endpoint.
//
// A Torrent sits between one cluster memory and the AXI interconnect.
// Frontend: a reading and a writing data streaming engine (N-D affine AGU,
// NC memory channels with FIFOs, data packer / splitter). Data switch:
// routes beats between the engines and the backend for the local-loopback,
// read, write and Chainwrite modes. Backend: AXI adaptor (Stream2AXI,
// AXI2Stream, message sender). Controller: cfg dispatch and the
// Grant / data / Finish protocol. This block structure is the published
// one; see the sub-blocks for what is this design's choice.
//
// Interface: task descriptor from the local core (valid/ready, done pulse
// with a cycle count), 2*NC memory request ports (NC read, NC write) to the
// cluster memory, one AXI4 write master and one AXI4 write slave to the
// interconnect. self_hop_i is this Torrent's base address in the system.
module torrent
  import torrent_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH   = 4,
  parameter int unsigned BURST_BEATS  = 16,
  parameter int unsigned CW_BUF_DEPTH = 0,
  parameter int unsigned FRAME_BODY_W = DATA_W - FHDR_W
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic [ADDR_W-1:0]           self_hop_i,
  // local core
  input  task_desc_t                  task_i,
  input  logic                        task_valid_i,
  output logic                        task_ready_o,
  output logic                        task_done_o,
  output logic [31:0]                 cycles_o,
  output logic                        busy_o,
  // cluster memory: ports [NC-1:0] read engine, [2NC-1:NC] write engine
  output logic     [2*NC-1:0]         mem_req_o,
  output mem_req_t [2*NC-1:0]         mem_req_data_o,
  input  logic     [2*NC-1:0]         mem_gnt_i,
  input  logic     [2*NC-1:0]         mem_rvalid_i,
  input  logic     [2*NC-1:0][BANK_W-1:0] mem_rdata_i,
  // AXI master
  output axi_aw_t                     m_aw_o,
  output logic                        m_aw_valid_o,
  input  logic                        m_aw_ready_i,
  output axi_w_t                      m_w_o,
  output logic                        m_w_valid_o,
  input  logic                        m_w_ready_i,
  input  axi_b_t                      m_b_i,
  input  logic                        m_b_valid_i,
  output logic                        m_b_ready_o,
  // AXI slave
  input  axi_aw_t                     s_aw_i,
  input  logic                        s_aw_valid_i,
  output logic                        s_aw_ready_o,
  input  axi_w_t                      s_w_i,
  input  logic                        s_w_valid_i,
  output logic                        s_w_ready_o,
  output axi_b_t                      s_b_o,
  output logic                        s_b_valid_o,
  input  logic                        s_b_ready_i
);
  sw_mode_e          mode;
  dse_cfg_t          rd_cfg, wr_cfg;
  logic              rd_start, rd_done, rd_busy, wr_start, wr_done, wr_busy;
  logic              tx_start, tx_done;
  logic [ADDR_W-1:0] tx_addr;
  logic [SIZE_W-1:0] tx_beats;
  logic [ADDR_W-1:0] msg_addr;
  logic [DATA_W-1:0] msg_data, cfg_data;
  logic              msg_valid, msg_ready, cfg_valid, cfg_ready, cfg_pending, grant, finish;
  logic [7:0]        msg_len;
  logic [DATA_W-1:0] p1_data, p2_data, p3_data, p4_data;
  logic              p1_valid, p1_ready, p2_valid, p2_ready;
  logic              p3_valid, p3_ready, p4_valid, p4_ready;
  logic [NC-1:0][BANK_W-1:0] unused_wr_rdata;
  logic [NC-1:0]     unused_wr_rvalid;

  assign unused_wr_rdata  = mem_rdata_i[2*NC-1:NC];
  assign unused_wr_rvalid = mem_rvalid_i[2*NC-1:NC];

  torrent_dse_rd #(.FIFO_DEPTH(FIFO_DEPTH)) i_dse_rd (
    .clk_i, .rst_ni,
    .start_i        (rd_start),
    .cfg_i          (rd_cfg),
    .busy_o         (rd_busy),
    .done_o         (rd_done),
    .mem_req_o      (mem_req_o[NC-1:0]),
    .mem_req_data_o (mem_req_data_o[NC-1:0]),
    .mem_gnt_i      (mem_gnt_i[NC-1:0]),
    .mem_rvalid_i   (mem_rvalid_i[NC-1:0]),
    .mem_rdata_i    (mem_rdata_i[NC-1:0]),
    .out_data_o     (p1_data),
    .out_valid_o    (p1_valid),
    .out_ready_i    (p1_ready)
  );

  torrent_dse_wr #(.FIFO_DEPTH(FIFO_DEPTH)) i_dse_wr (
    .clk_i, .rst_ni,
    .start_i        (wr_start),
    .cfg_i          (wr_cfg),
    .busy_o         (wr_busy),
    .done_o         (wr_done),
    .mem_req_o      (mem_req_o[2*NC-1:NC]),
    .mem_req_data_o (mem_req_data_o[2*NC-1:NC]),
    .mem_gnt_i      (mem_gnt_i[2*NC-1:NC]),
    .in_data_i      (p3_data),
    .in_valid_i     (p3_valid),
    .in_ready_o     (p3_ready)
  );

  torrent_data_switch #(.CW_BUF_DEPTH(CW_BUF_DEPTH)) i_switch (
    .clk_i, .rst_ni,
    .mode_i     (mode),
    .p1_data_i  (p1_data),  .p1_valid_i (p1_valid), .p1_ready_o (p1_ready),
    .p2_data_o  (p2_data),  .p2_valid_o (p2_valid), .p2_ready_i (p2_ready),
    .p3_data_o  (p3_data),  .p3_valid_o (p3_valid), .p3_ready_i (p3_ready),
    .p4_data_i  (p4_data),  .p4_valid_i (p4_valid), .p4_ready_o (p4_ready)
  );

  torrent_backend #(.BURST_BEATS(BURST_BEATS)) i_backend (
    .clk_i, .rst_ni,
    .m_aw_o, .m_aw_valid_o, .m_aw_ready_i, .m_w_o, .m_w_valid_o, .m_w_ready_i,
    .m_b_i, .m_b_valid_i, .m_b_ready_o,
    .s_aw_i, .s_aw_valid_i, .s_aw_ready_o, .s_w_i, .s_w_valid_i, .s_w_ready_o,
    .s_b_o, .s_b_valid_o, .s_b_ready_i,
    .msg_addr_i  (msg_addr),
    .msg_len_i   (msg_len),
    .msg_data_i  (msg_data),
    .msg_valid_i (msg_valid),
    .msg_ready_o (msg_ready),
    .cfg_data_o  (cfg_data),
    .cfg_valid_o (cfg_valid),
    .cfg_ready_i (cfg_ready),
    .cfg_pending_o (cfg_pending),
    .grant_o     (grant),
    .finish_o    (finish),
    .tx_start_i  (tx_start),
    .tx_addr_i   (tx_addr),
    .tx_beats_i  (tx_beats),
    .tx_done_o   (tx_done),
    .p2_data_i   (p2_data),
    .p2_valid_i  (p2_valid),
    .p2_ready_o  (p2_ready),
    .p4_data_o   (p4_data),
    .p4_valid_o  (p4_valid),
    .p4_ready_i  (p4_ready)
  );

  torrent_ctrl #(.FRAME_BODY_W(FRAME_BODY_W)) i_ctrl (
    .clk_i, .rst_ni,
    .self_hop_i,
    .task_i, .task_valid_i, .task_ready_o, .task_done_o, .cycles_o, .busy_o,
    .cfg_frame_i (cfg_data),
    .cfg_valid_i (cfg_valid),
    .cfg_ready_o (cfg_ready),
    .cfg_pending_i (cfg_pending),
    .grant_i     (grant),
    .finish_i    (finish),
    .msg_addr_o  (msg_addr),
    .msg_len_o   (msg_len),
    .msg_data_o  (msg_data),
    .msg_valid_o (msg_valid),
    .msg_ready_i (msg_ready),
    .mode_o      (mode),
    .rd_start_o  (rd_start),
    .rd_cfg_o    (rd_cfg),
    .rd_done_i   (rd_done),
    .wr_start_o  (wr_start),
    .wr_cfg_o    (wr_cfg),
    .wr_done_i   (wr_done),
    .tx_start_o  (tx_start),
    .tx_addr_o   (tx_addr),
    .tx_beats_o  (tx_beats),
    .tx_done_i   (tx_done),
    .rx_valid_i  (p4_valid)
  );
endmodule
