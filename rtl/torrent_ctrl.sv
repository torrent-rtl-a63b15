// torrent_ctrl: chain set-up and finish management of one Torrent.
//
// The controller runs the four-phase Chainwrite orchestration:
//   (1) cfg dispatch   the initiator sends each chain member its cfg
//                      (fields A-F, split into frames of FRAME_BODY_W bits),
//   (2) Grant          the chain's tail sends Grant to its previous hop;
//                      each middle node forwards it once it is set up,
//   (3) data           the head streams data into the chain; middle nodes
//                      store and forward every beat, the tail stores it,
//   (4) Finish         the tail sends Finish once its data is in memory and
//                      each middle node forwards it back to the head.
// State names follow the published sequence charts (SEND_CFG, WAIT_GRANT,
// RECV_GRANT, SEND_DATA, WAIT_FINISH, RECV_FINISH on the initiator;
// RECV_CFG, SEND_GRANT, WAIT_DATA, RECV_DATA, SEND_FINISH on the tail;
// RECV_FWD_GRANT, RECV_FWD_DATA, RECV_FWD_FINISH on middle nodes).
//
// A node's role comes from its cfg: a READ-type frame makes it the data
// source (it reads its memory and sends to next_hop), a WRITE-type frame
// makes it a middle node when next_hop is set and the tail otherwise.
// Tasks from the local core (task_desc_t, valid/ready) are:
//   TASK_WRITE  this node is the head, dst[0..n_dst-1] form the chain;
//   TASK_READ   dst[0] becomes the source and this node the tail;
//   TASK_LOCAL  local read-to-write copy, no messages.
// task_done_o pulses when a task this node initiated has completed, and
// cycles_o then holds the cycles from task acceptance to completion (the
// latency counter used to measure the design).
//
// Messages leave through msg_* as write bursts: one burst per cfg holding
// all its frames, one single-beat write per Grant or Finish, which carry
// the task id. Incoming Grant/Finish pulses
// are latched, so their arrival time relative to the FSM does not matter.
// A follower accepts a new cfg only when idle: a busy Torrent stalls the
// cfg write, which holds back the Grant until it is ready for the task. An
// arriving cfg also has priority over a task from the local core.
// Widths, frame layout and the message encoding are this design's choices.
module torrent_ctrl
  import torrent_pkg::*;
#(
  parameter int unsigned FRAME_BODY_W = DATA_W - FHDR_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [ADDR_W-1:0]  self_hop_i,
  // tasks from the local core
  input  task_desc_t         task_i,
  input  logic               task_valid_i,
  output logic               task_ready_o,
  output logic               task_done_o,
  output logic [31:0]        cycles_o,
  output logic               busy_o,
  // incoming messages (backend slave)
  input  logic [DATA_W-1:0]  cfg_frame_i,
  input  logic               cfg_valid_i,
  output logic               cfg_ready_o,
  input  logic               cfg_pending_i,   // a cfg burst is arriving
  input  logic               grant_i,
  input  logic               finish_i,
  // outgoing messages (backend master)
  output logic [ADDR_W-1:0]  msg_addr_o,
  output logic [7:0]         msg_len_o,      // beats - 1 of the message burst
  output logic [DATA_W-1:0]  msg_data_o,
  output logic               msg_valid_o,
  input  logic               msg_ready_i,
  // datapath control
  output sw_mode_e           mode_o,
  output logic               rd_start_o,
  output dse_cfg_t           rd_cfg_o,
  input  logic               rd_done_i,
  output logic               wr_start_o,
  output dse_cfg_t           wr_cfg_o,
  input  logic               wr_done_i,
  output logic               tx_start_o,
  output logic [ADDR_W-1:0]  tx_addr_o,
  output logic [SIZE_W-1:0]  tx_beats_o,
  input  logic               tx_done_i,
  input  logic               rx_valid_i
);
  localparam int unsigned NFRAMES = (CFG_W + FRAME_BODY_W - 1) / FRAME_BODY_W;
  localparam int unsigned PAD_W   = NFRAMES * FRAME_BODY_W;
  localparam int unsigned BEAT_SH = $clog2(BEAT_B);

  typedef enum logic [4:0] {
    IDLE, SEND_CFG, WAIT_GRANT, RECV_GRANT, SEND_DATA, WAIT_FINISH, RECV_FINISH,
    RECV_CFG, SEND_GRANT, WAIT_DATA, RECV_DATA, SEND_FINISH,
    RECV_FWD_GRANT, RECV_FWD_DATA, RECV_FWD_FINISH, LOCAL_COPY
  } state_e;

  state_e            state_q, state_d;
  task_desc_t        task_q;
  logic              initiator_q;
  chain_cfg_t        cur_q;           // this node's role in the running task
  logic [PAD_W-1:0]  rx_cfg_q;        // frames collected so far
  req_type_e         rx_type_q;
  logic [FID_W-1:0]  rx_total_q, rx_idx_q;
  logic [NDST_W-1:0] di_q;            // destination being configured
  logic [FID_W-1:0]  fi_q;            // frame being sent
  logic              grant_seen_q, finish_seen_q;
  logic              rd_done_q, wr_done_q, tx_done_q;
  logic [31:0]       cyc_q;
  sw_mode_e          mode_q;

  // ---------------- cfg packet of destination di_q ----------------
  chain_cfg_t       tx_cfg;
  req_type_e        tx_type;
  logic [PAD_W-1:0] tx_pad;
  logic [FRAME_BODY_W-1:0] tx_body;
  logic [FID_W-1:0] tx_fid;

  always_comb begin
    tx_cfg.task_id  = task_q.task_id;
    tx_cfg.size     = task_q.size;
    tx_cfg.self_hop = task_q.dst[di_q].hop;
    tx_cfg.dse      = task_q.dst[di_q].dse;
    if (task_q.kind == TASK_READ) begin
      tx_type         = REQ_READ;
      tx_cfg.prev_hop = NO_HOP;
      tx_cfg.next_hop = self_hop_i;
    end else begin
      tx_type         = REQ_WRITE;
      tx_cfg.prev_hop = (di_q == '0) ? self_hop_i : task_q.dst[di_q - 1'b1].hop;
      tx_cfg.next_hop = (di_q == task_q.n_dst - 1'b1) ? NO_HOP : task_q.dst[di_q + 1'b1].hop;
    end
    tx_pad  = PAD_W'(tx_cfg);
    tx_body = tx_pad[fi_q * FRAME_BODY_W +: FRAME_BODY_W];
    tx_fid  = (fi_q == '0) ? FID_W'(NFRAMES) : fi_q;
  end

  // frame layout: {type, frame id, zero padding, body}
  function automatic logic [DATA_W-1:0] make_frame(input req_type_e t, input logic [FID_W-1:0] f,
                                                   input logic [FRAME_BODY_W-1:0] b);
    logic [DATA_W-1:0] d;
    d = '0;
    d[FRAME_BODY_W-1:0]     = b;
    d[DATA_W-2 -: FID_W]    = f;
    d[DATA_W-1]             = t;
    return d;
  endfunction

  function automatic logic [DATA_W-1:0] make_ctrl(input logic [TASK_W-1:0] id);
    return DATA_W'(id);
  endfunction

  // ---------------- incoming frame fields ----------------
  req_type_e               in_type;
  logic [FID_W-1:0]        in_fid;
  logic [FRAME_BODY_W-1:0] in_body;
  logic [PAD_W-1:0]        rx_next;   // rx_cfg_q with the incoming frame merged
  logic                    cfg_fire, rx_complete;

  assign in_type  = req_type_e'(cfg_frame_i[DATA_W-1]);
  assign in_fid   = cfg_frame_i[DATA_W-2 -: FID_W];
  assign in_body  = cfg_frame_i[FRAME_BODY_W-1:0];
  assign cfg_ready_o = (state_q == IDLE) || (state_q == RECV_CFG);
  assign cfg_fire = cfg_valid_i & cfg_ready_o;

  always_comb begin
    rx_next = rx_cfg_q;
    if (state_q == IDLE) rx_next[0 +: FRAME_BODY_W] = in_body;
    else                 rx_next[rx_idx_q * FRAME_BODY_W +: FRAME_BODY_W] = in_body;
    rx_complete = (state_q == IDLE) ? (in_fid <= 8'd1) : (rx_idx_q + 1'b1 >= rx_total_q);
  end

  chain_cfg_t rx_cfg;
  assign rx_cfg = chain_cfg_t'(rx_next[CFG_W-1:0]);

  // ---------------- outputs ----------------
  always_comb begin
    msg_valid_o = 1'b0;
    msg_addr_o  = '0;
    msg_data_o  = '0;
    msg_len_o   = '0;
    unique case (state_q)
      SEND_CFG: begin
        msg_valid_o = 1'b1;
        msg_addr_o  = kind_addr(task_q.dst[di_q].hop, KIND_CFG);
        msg_len_o   = 8'(NFRAMES - 1);
        msg_data_o  = make_frame(tx_type, tx_fid, tx_body);
      end
      SEND_GRANT, RECV_FWD_GRANT: begin
        msg_valid_o = 1'b1;
        msg_addr_o  = kind_addr(cur_q.prev_hop, KIND_GRANT);
        msg_data_o  = make_ctrl(cur_q.task_id);
      end
      SEND_FINISH, RECV_FWD_FINISH: begin
        msg_valid_o = 1'b1;
        msg_addr_o  = kind_addr(cur_q.prev_hop, KIND_FINISH);
        msg_data_o  = make_ctrl(cur_q.task_id);
      end
      default: ;
    endcase
  end

  assign task_ready_o = (state_q == IDLE) & ~cfg_valid_i & ~cfg_pending_i;
  // a local copy starts in the cycle it is accepted, already in Local mode
  assign mode_o       = (state_q == IDLE && state_d == LOCAL_COPY) ? SW_LOCAL : mode_q;
  assign busy_o       = (state_q != IDLE);
  // a local copy starts straight from IDLE, with the descriptor's patterns
  assign rd_cfg_o     = (state_q == IDLE) ? task_i.rd_dse : cur_q.dse;
  assign wr_cfg_o     = (state_q == IDLE) ? task_i.wr_dse : cur_q.dse;
  assign tx_addr_o    = kind_addr(cur_q.next_hop, KIND_DATA);
  assign tx_beats_o   = cur_q.size >> BEAT_SH;

  // start pulses are issued on the transition into the data phase
  assign rd_start_o = (state_q == RECV_GRANT) ||
                      ((state_q == IDLE) && state_d == LOCAL_COPY);
  assign tx_start_o = (state_q == RECV_GRANT) ||
                      ((state_q == RECV_FWD_GRANT) && msg_ready_i);
  assign wr_start_o = ((state_q == RECV_FWD_GRANT || state_q == SEND_GRANT) && msg_ready_i) ||
                      ((state_q == IDLE) && state_d == LOCAL_COPY);

  // ---------------- next state ----------------
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      IDLE: begin
        if (cfg_fire) begin
          if (!rx_complete)               state_d = RECV_CFG;
          else if (in_type == REQ_READ)   state_d = WAIT_GRANT;
          else if (rx_cfg.next_hop == NO_HOP) state_d = SEND_GRANT;
          else                            state_d = WAIT_GRANT;
        end else if (task_valid_i && !cfg_pending_i) begin
          state_d = (task_i.kind == TASK_LOCAL) ? LOCAL_COPY : SEND_CFG;
        end
      end
      RECV_CFG: if (cfg_fire && rx_complete) begin
        if (rx_type_q == REQ_READ)          state_d = WAIT_GRANT;
        else if (rx_cfg.next_hop == NO_HOP) state_d = SEND_GRANT;
        else                                state_d = WAIT_GRANT;
      end
      SEND_CFG: if (msg_ready_i && fi_q == FID_W'(NFRAMES - 1) &&
                    (task_q.kind == TASK_READ || di_q == task_q.n_dst - 1'b1)) begin
        state_d = (task_q.kind == TASK_READ) ? SEND_GRANT : WAIT_GRANT;
      end
      WAIT_GRANT: if (grant_seen_q) begin
        // the data source starts sending; a middle node forwards the Grant
        state_d = (cur_q.prev_hop == NO_HOP || initiator_q) ? RECV_GRANT : RECV_FWD_GRANT;
      end
      RECV_GRANT:      state_d = SEND_DATA;
      SEND_DATA:       if (tx_done_q && rd_done_q) state_d = WAIT_FINISH;
      WAIT_FINISH:     if (finish_seen_q) state_d = (cur_q.prev_hop == NO_HOP || initiator_q)
                                                     ? RECV_FINISH : RECV_FWD_FINISH;
      RECV_FINISH:     state_d = IDLE;
      SEND_GRANT:      if (msg_ready_i) state_d = WAIT_DATA;
      RECV_FWD_GRANT:  if (msg_ready_i) state_d = WAIT_DATA;
      WAIT_DATA:       if (rx_valid_i) state_d = (cur_q.next_hop == NO_HOP) ? RECV_DATA : RECV_FWD_DATA;
      RECV_DATA:       if (wr_done_q) state_d = SEND_FINISH;
      RECV_FWD_DATA:   if (wr_done_q && tx_done_q) state_d = WAIT_FINISH;
      SEND_FINISH:     if (msg_ready_i) state_d = IDLE;
      RECV_FWD_FINISH: if (msg_ready_i) state_d = IDLE;
      LOCAL_COPY:      if (wr_done_q && rd_done_q) state_d = IDLE;
      default:         state_d = IDLE;
    endcase
  end

  // ---------------- registers ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= IDLE;
      task_q        <= '0;
      initiator_q   <= 1'b0;
      cur_q         <= '0;
      rx_cfg_q      <= '0;
      rx_type_q     <= REQ_WRITE;
      rx_total_q    <= '0;
      rx_idx_q      <= '0;
      di_q          <= '0;
      fi_q          <= '0;
      grant_seen_q  <= 1'b0;
      finish_seen_q <= 1'b0;
      rd_done_q     <= 1'b0;
      wr_done_q     <= 1'b0;
      tx_done_q     <= 1'b0;
      cyc_q         <= '0;
      cycles_o      <= '0;
      task_done_o   <= 1'b0;
      mode_q        <= SW_LOCAL;
    end else begin
      state_q     <= state_d;
      task_done_o <= 1'b0;
      cyc_q       <= cyc_q + 1'b1;

      // sticky event flags
      if (grant_i)   grant_seen_q  <= 1'b1;
      if (finish_i)  finish_seen_q <= 1'b1;
      if (rd_done_i) rd_done_q     <= 1'b1;
      if (wr_done_i) wr_done_q     <= 1'b1;
      if (tx_done_i) tx_done_q     <= 1'b1;

      // cfg reception
      if (cfg_fire) begin
        rx_cfg_q <= rx_next;
        if (state_q == IDLE) begin
          rx_type_q  <= in_type;
          rx_total_q <= in_fid;
          rx_idx_q   <= 8'd1;
          initiator_q <= 1'b0;
        end else begin
          rx_idx_q <= rx_idx_q + 1'b1;
        end
        if (rx_complete) begin
          cur_q <= rx_cfg;
          // a middle node forwards (CW); the tail and the source have one path
          if ((state_q == IDLE ? in_type : rx_type_q) == REQ_READ) mode_q <= SW_READ;
          else if (rx_cfg.next_hop == NO_HOP)                       mode_q <= SW_WRITE;
          else                                                       mode_q <= SW_CW;
        end
      end

      // task acceptance
      if (state_q == IDLE && state_d != IDLE && !cfg_fire) begin
        task_q      <= task_i;
        initiator_q <= 1'b1;
        di_q        <= '0;
        fi_q        <= '0;
        cyc_q       <= 32'd1;
        cur_q.task_id <= task_i.task_id;
        cur_q.size    <= task_i.size;
        if (task_i.kind == TASK_LOCAL) begin
          mode_q    <= SW_LOCAL;
          cur_q.dse <= task_i.rd_dse;
        end
      end

      // dispatch: walk destinations and frames
      if (state_q == SEND_CFG && msg_ready_i) begin
        if (fi_q == FID_W'(NFRAMES - 1)) begin
          fi_q <= '0;
          di_q <= di_q + 1'b1;
        end else begin
          fi_q <= fi_q + 1'b1;
        end
        if (state_d != SEND_CFG) begin
          // after dispatch the initiator takes its own place in the chain
          if (task_q.kind == TASK_READ) begin
            cur_q.prev_hop <= task_q.dst[0].hop;
            cur_q.self_hop <= self_hop_i;
            cur_q.next_hop <= NO_HOP;
            cur_q.dse      <= task_q.wr_dse;
            mode_q         <= SW_WRITE;
          end else begin
            cur_q.prev_hop <= NO_HOP;
            cur_q.self_hop <= self_hop_i;
            cur_q.next_hop <= task_q.dst[0].hop;
            cur_q.dse      <= task_q.rd_dse;
            mode_q         <= SW_READ;
          end
        end
      end

      // consume events when the state that waits for them leaves
      if (state_q == WAIT_GRANT && state_d != WAIT_GRANT)   grant_seen_q  <= 1'b0;
      if (state_q == WAIT_FINISH && state_d != WAIT_FINISH) finish_seen_q <= 1'b0;
      if (rd_start_o) rd_done_q <= 1'b0;
      if (wr_start_o) wr_done_q <= 1'b0;
      if (tx_start_o) tx_done_q <= 1'b0;

      // completion of a task this node initiated
      if (initiator_q && state_q != IDLE && state_d == IDLE) begin
        task_done_o <= 1'b1;
        cycles_o    <= cyc_q;
      end
    end
  end

  // a message stays offered until the backend takes it
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   msg_valid_o & ~msg_ready_i |=> msg_valid_o);
endmodule
