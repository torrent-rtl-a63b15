// torrent_axi2stream: backend AXI write slave of a Torrent.
//
// Every message between Torrents arrives as an AXI4 write to this Torrent's
// window; the kind is encoded in address bits [15:14] (torrent_pkg::kind_e):
//   KIND_CFG    each beat is one cfg frame, handed to the controller
//   KIND_GRANT  Grant from the next hop (task id in the low data bits)
//   KIND_FINISH Finish from the next hop
//   KIND_DATA   data beats, handed to port 4 of the data switch
// One burst is handled at a time: AW is accepted when idle (a cfg burst
// only when the controller can take a cfg, so a busy Torrent holds a new
// cfg back at the address channel and its slave port stays free for the
// data, Grant and Finish of the task it is working on), the W beats
// are routed by the latched kind (cfg and data beats wait for their
// consumer's ready; Grant/Finish are always accepted and give a one-cycle
// pulse), and after WLAST one OKAY response with the burst's id is returned.
// The published design names this block and its role; the address-based
// message encoding is this design's choice.
module torrent_axi2stream
  import torrent_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // AXI write slave
  input  axi_aw_t           aw_i,
  input  logic              aw_valid_i,
  output logic              aw_ready_o,
  input  axi_w_t            w_i,
  input  logic              w_valid_i,
  output logic              w_ready_o,
  output axi_b_t            b_o,
  output logic              b_valid_o,
  input  logic              b_ready_i,
  // cfg frames
  output logic [DATA_W-1:0] cfg_data_o,
  output logic              cfg_valid_o,
  input  logic              cfg_ready_i,
  output logic              cfg_pending_o,   // a cfg burst is arriving
  // control pulses
  output logic              grant_o,
  output logic              finish_o,
  output logic [TASK_W-1:0] msg_task_o,
  // data stream (port 4)
  output logic [DATA_W-1:0] data_o,
  output logic              data_valid_o,
  input  logic              data_ready_i
);
  typedef enum logic [1:0] {S_IDLE, S_W, S_B} state_e;
  state_e          state_q;
  kind_e           kind_q;
  logic [ID_W-1:0] id_q;
  logic            w_fire;

  logic aw_is_cfg;
  assign aw_is_cfg     = (kind_e'(aw_i.addr[KIND_LSB +: 2]) == KIND_CFG);
  assign aw_ready_o    = (state_q == S_IDLE) & (~aw_is_cfg | cfg_ready_i);
  assign cfg_pending_o = ((state_q == S_IDLE) & aw_valid_i & aw_is_cfg) |
                         ((state_q == S_W) & (kind_q == KIND_CFG));
  assign cfg_data_o   = w_i.data;
  assign data_o       = w_i.data;
  assign msg_task_o   = w_i.data[TASK_W-1:0];
  assign cfg_valid_o  = (state_q == S_W) & (kind_q == KIND_CFG)  & w_valid_i;
  assign data_valid_o = (state_q == S_W) & (kind_q == KIND_DATA) & w_valid_i;

  always_comb begin
    w_ready_o = 1'b0;
    if (state_q == S_W) begin
      unique case (kind_q)
        KIND_CFG:  w_ready_o = cfg_ready_i;
        KIND_DATA: w_ready_o = data_ready_i;
        default:   w_ready_o = 1'b1;
      endcase
    end
  end
  assign w_fire   = w_valid_i & w_ready_o;
  assign grant_o  = w_fire & (kind_q == KIND_GRANT);
  assign finish_o = w_fire & (kind_q == KIND_FINISH);

  assign b_valid_o = (state_q == S_B);
  assign b_o.id    = id_q;
  assign b_o.resp  = 2'b00;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      kind_q  <= KIND_CFG;
      id_q    <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (aw_valid_i && aw_ready_o) begin
          state_q <= S_W;
          kind_q  <= kind_e'(aw_i.addr[KIND_LSB +: 2]);
          id_q    <= aw_i.id;
        end
        S_W: if (w_fire && w_i.last) state_q <= S_B;
        S_B: if (b_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
