// torrent_dse_rd: reading data streaming engine with data packer.
//
// On start_i the AGU walks the N-D pattern of cfg_i. For every AGU address
// each of the NC memory channels reads one BANK_W word at
//   addr + c * cfg_i.sstride
// into its own FIFO; the data packer emits one DATA_W beat (channel c in
// bits [c*BANK_W +: BANK_W]) once every channel FIFO holds a word. The
// channels run independently: a channel that loses bank arbitration simply
// retries, and the AGU moves on when all channels have issued the current
// address. A channel only issues when its FIFO has room for the reply,
// so memory replies are never dropped. done_o pulses one cycle after the
// last beat leaves. Structure (AGU, per-channel FIFOs, packer) follows the
// streaming engine of the published design; FIFO depth, the spatial-stride
// channel addressing and the handshakes are this design's choice.
//
// Throughput: one beat per cycle when there are no bank conflicts.
module torrent_dse_rd
  import torrent_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       start_i,
  input  dse_cfg_t                   cfg_i,
  output logic                       busy_o,
  output logic                       done_o,
  // memory channels
  output logic     [NC-1:0]          mem_req_o,
  output mem_req_t [NC-1:0]          mem_req_data_o,
  input  logic     [NC-1:0]          mem_gnt_i,
  input  logic     [NC-1:0]          mem_rvalid_i,
  input  logic     [NC-1:0][BANK_W-1:0] mem_rdata_i,
  // packed output stream (port 1 of the data switch)
  output logic [DATA_W-1:0]          out_data_o,
  output logic                       out_valid_o,
  input  logic                       out_ready_i
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [MADDR_W-1:0] agu_addr, sstride_q;
  logic               agu_valid, agu_ready, agu_busy, agu_last;
  logic [NC-1:0]      issued_q, issue_now, inflight_q;
  logic [NC-1:0]      f_valid, f_in_ready;
  logic [NC-1:0][CW-1:0] f_count;
  logic               active_q;

  torrent_agu i_agu (
    .clk_i, .rst_ni,
    .start_i (start_i & ~active_q),
    .cfg_i,
    .addr_o  (agu_addr),
    .valid_o (agu_valid),
    .ready_i (agu_ready),
    .last_o  (agu_last),
    .busy_o  (agu_busy)
  );

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      mem_req_o[c]            = agu_valid & ~issued_q[c] &
                                (32'(f_count[c]) + 32'(inflight_q[c]) < FIFO_DEPTH);
      mem_req_data_o[c].we    = 1'b0;
      mem_req_data_o[c].addr  = agu_addr + MADDR_W'(c) * sstride_q;
      mem_req_data_o[c].wdata = '0;
      issue_now[c]            = mem_req_o[c] & mem_gnt_i[c];
    end
  end
  assign agu_ready = agu_valid & (&(issued_q | issue_now));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      issued_q   <= '0;
      inflight_q <= '0;
      sstride_q  <= '0;
      active_q   <= 1'b0;
      done_o     <= 1'b0;
    end else begin
      done_o     <= 1'b0;
      inflight_q <= issue_now;
      if (agu_ready) issued_q <= '0;
      else           issued_q <= issued_q | issue_now;
      if (start_i && !active_q) begin
        active_q  <= 1'b1;
        sstride_q <= cfg_i.sstride;
      end else if (active_q && !agu_busy && inflight_q == '0 && f_valid == '0) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_ch
    stream_fifo #(.WIDTH(BANK_W), .DEPTH(FIFO_DEPTH)) i_fifo (
      .clk_i, .rst_ni,
      .flush_i     (1'b0),
      .in_data_i   (mem_rdata_i[c]),
      .in_valid_i  (mem_rvalid_i[c]),
      .in_ready_o  (f_in_ready[c]),
      .out_data_o  (out_data_o[c*BANK_W +: BANK_W]),
      .out_valid_o (f_valid[c]),
      .out_ready_i (out_valid_o & out_ready_i),
      .count_o     (f_count[c])
    );
  end

  // data packer: a beat leaves when every channel has its word
  assign out_valid_o = &f_valid;
  assign busy_o      = active_q;

  // a reply always finds room, because space was reserved at issue time
  assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rvalid_i[0] |-> f_in_ready[0]);
endmodule
