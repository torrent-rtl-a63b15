// torrent_backend: the Torrent AXI adaptor.
//
// Bridges the Torrent frontend and the AXI interconnect. It holds
//  - Stream2AXI: data beats from data-switch port 2 become write bursts to
//    the next hop's data window;
//  - AXI2Stream: the AXI write slave; incoming writes become cfg frames,
//    Grant/Finish pulses or data beats for data-switch port 4;
//  - the message sender used by the controller for cfg frames, Grant and
//    Finish: each message is one write burst (AW, then msg_len_i+1 W beats;
//    all frames of one cfg travel in one burst, so two initiators' cfgs to
//    the same Torrent can never interleave). msg_ready_o acknowledges each
//    beat; the controller keeps msg_addr_i and msg_len_i stable meanwhile.
// Messages and data share the one AXI master port. A message waits only for
// a data burst already in progress and otherwise wins over the next data
// burst, so a Grant is never stuck behind data that cannot flow yet.
// Write responses on the master side are always accepted. The published
// design names Stream2AXI, AXI2Stream and chain initial/finish management
// as the backend's parts; the sharing rule is this design's choice.
module torrent_backend
  import torrent_pkg::*;
#(
  parameter int unsigned BURST_BEATS = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // AXI master (to the interconnect)
  output axi_aw_t           m_aw_o,
  output logic              m_aw_valid_o,
  input  logic              m_aw_ready_i,
  output axi_w_t            m_w_o,
  output logic              m_w_valid_o,
  input  logic              m_w_ready_i,
  input  axi_b_t            m_b_i,
  input  logic              m_b_valid_i,
  output logic              m_b_ready_o,
  // AXI slave (from the interconnect)
  input  axi_aw_t           s_aw_i,
  input  logic              s_aw_valid_i,
  output logic              s_aw_ready_o,
  input  axi_w_t            s_w_i,
  input  logic              s_w_valid_i,
  output logic              s_w_ready_o,
  output axi_b_t            s_b_o,
  output logic              s_b_valid_o,
  input  logic              s_b_ready_i,
  // controller: messages out
  input  logic [ADDR_W-1:0] msg_addr_i,
  input  logic [7:0]        msg_len_i,
  input  logic [DATA_W-1:0] msg_data_i,
  input  logic              msg_valid_i,
  output logic              msg_ready_o,
  // controller: messages in
  output logic [DATA_W-1:0] cfg_data_o,
  output logic              cfg_valid_o,
  input  logic              cfg_ready_i,
  output logic              cfg_pending_o,
  output logic              grant_o,
  output logic              finish_o,
  // controller: data transmission
  input  logic              tx_start_i,
  input  logic [ADDR_W-1:0] tx_addr_i,
  input  logic [SIZE_W-1:0] tx_beats_i,
  output logic              tx_done_o,
  // data switch port 2 (outgoing) and port 4 (incoming)
  input  logic [DATA_W-1:0] p2_data_i,
  input  logic              p2_valid_i,
  output logic              p2_ready_o,
  output logic [DATA_W-1:0] p4_data_o,
  output logic              p4_valid_o,
  input  logic              p4_ready_i
);
  axi_aw_t dt_aw;
  axi_w_t  dt_w;
  logic    dt_aw_valid, dt_w_valid, dt_busy;
  logic    msg_in_w_q;   // message address sent, data beats pending
  logic [7:0] msg_cnt_q; // message beats sent
  logic    msg_own;
  logic [TASK_W-1:0] unused_task;

  torrent_stream2axi #(.BURST_BEATS(BURST_BEATS)) i_s2a (
    .clk_i, .rst_ni,
    .start_i    (tx_start_i),
    .addr_i     (tx_addr_i),
    .beats_i    (tx_beats_i),
    .allow_i    (~msg_own),
    .busy_o     (dt_busy),
    .done_o     (tx_done_o),
    .in_data_i  (p2_data_i),
    .in_valid_i (p2_valid_i),
    .in_ready_o (p2_ready_o),
    .aw_o       (dt_aw),
    .aw_valid_o (dt_aw_valid),
    .aw_ready_i (m_aw_ready_i & ~msg_own),
    .w_o        (dt_w),
    .w_valid_o  (dt_w_valid),
    .w_ready_i  (m_w_ready_i & ~msg_own)
  );

  torrent_axi2stream i_a2s (
    .clk_i, .rst_ni,
    .aw_i         (s_aw_i),
    .aw_valid_i   (s_aw_valid_i),
    .aw_ready_o   (s_aw_ready_o),
    .w_i          (s_w_i),
    .w_valid_i    (s_w_valid_i),
    .w_ready_o    (s_w_ready_o),
    .b_o          (s_b_o),
    .b_valid_o    (s_b_valid_o),
    .b_ready_i    (s_b_ready_i),
    .cfg_data_o   (cfg_data_o),
    .cfg_valid_o  (cfg_valid_o),
    .cfg_ready_i  (cfg_ready_i),
    .cfg_pending_o(cfg_pending_o),
    .grant_o      (grant_o),
    .finish_o     (finish_o),
    .msg_task_o   (unused_task),
    .data_o       (p4_data_o),
    .data_valid_o (p4_valid_o),
    .data_ready_i (p4_ready_i)
  );

  // message sender owns the port while a message is under way, or when one
  // is waiting and no data burst is in progress
  assign msg_own = msg_in_w_q | (msg_valid_i & ~dt_busy);

  always_comb begin
    if (msg_own) begin
      m_aw_o       = '{id: '0, addr: msg_addr_i, len: msg_len_i};
      m_aw_valid_o = ~msg_in_w_q;
      m_w_o        = '{data: msg_data_i, last: (msg_cnt_q == msg_len_i)};
      m_w_valid_o  = msg_in_w_q;
    end else begin
      m_aw_o       = dt_aw;
      m_aw_valid_o = dt_aw_valid;
      m_w_o        = dt_w;
      m_w_valid_o  = dt_w_valid;
    end
  end
  assign msg_ready_o = msg_in_w_q & m_w_ready_i;
  assign m_b_ready_o = 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      msg_in_w_q <= 1'b0;
      msg_cnt_q  <= '0;
    end else if (!msg_in_w_q) begin
      if (msg_own && m_aw_ready_i) msg_in_w_q <= 1'b1;
      msg_cnt_q <= '0;
    end else if (m_w_ready_i) begin
      msg_cnt_q <= msg_cnt_q + 1'b1;
      if (msg_cnt_q == msg_len_i) msg_in_w_q <= 1'b0;
    end
  end

  // every write this Torrent issues must complete without error
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   m_b_valid_i |-> m_b_i.resp == 2'b00);
endmodule
