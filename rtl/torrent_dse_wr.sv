// torrent_dse_wr: writing data streaming engine with data splitter.
//
// The data splitter takes one DATA_W beat from the input stream (port 3 of
// the data switch) when every channel FIFO has room and pushes channel c's
// BANK_W slice into FIFO c. On start_i the AGU walks the N-D pattern of
// cfg_i; for every AGU address each channel writes its next FIFO word to
// addr + c * cfg_i.sstride. Channels proceed independently and the AGU
// moves on once all channels have written the current address. done_o
// pulses once the last word is in memory. Like the reading engine this
// mirrors the published streaming engine (AGU, channel FIFOs, splitter);
// FIFO depth and handshakes are this design's choice.
//
// Throughput: one beat per cycle when there are no bank conflicts.
module torrent_dse_wr
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
  // memory channels (write only)
  output logic     [NC-1:0]          mem_req_o,
  output mem_req_t [NC-1:0]          mem_req_data_o,
  input  logic     [NC-1:0]          mem_gnt_i,
  // input stream
  input  logic [DATA_W-1:0]          in_data_i,
  input  logic                       in_valid_i,
  output logic                       in_ready_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [MADDR_W-1:0]    agu_addr, sstride_q;
  logic                  agu_valid, agu_ready, agu_busy, agu_last;
  logic [NC-1:0]         done_ch_q, write_now;
  logic [NC-1:0]         f_valid, f_in_ready;
  logic [NC-1:0][BANK_W-1:0] f_data;
  logic [NC-1:0][CW-1:0] f_count;
  logic                  active_q;

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

  // data splitter: all channels take their slice in the same cycle
  assign in_ready_o = &f_in_ready;

  for (genvar c = 0; c < NC; c++) begin : g_ch
    stream_fifo #(.WIDTH(BANK_W), .DEPTH(FIFO_DEPTH)) i_fifo (
      .clk_i, .rst_ni,
      .flush_i     (1'b0),
      .in_data_i   (in_data_i[c*BANK_W +: BANK_W]),
      .in_valid_i  (in_valid_i & in_ready_o),
      .in_ready_o  (f_in_ready[c]),
      .out_data_o  (f_data[c]),
      .out_valid_o (f_valid[c]),
      .out_ready_i (write_now[c]),
      .count_o     (f_count[c])
    );
  end

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      mem_req_o[c]            = agu_valid & ~done_ch_q[c] & f_valid[c];
      mem_req_data_o[c].we    = 1'b1;
      mem_req_data_o[c].addr  = agu_addr + MADDR_W'(c) * sstride_q;
      mem_req_data_o[c].wdata = f_data[c];
      write_now[c]            = mem_req_o[c] & mem_gnt_i[c];
    end
  end
  assign agu_ready = agu_valid & (&(done_ch_q | write_now));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      done_ch_q <= '0;
      sstride_q <= '0;
      active_q  <= 1'b0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (agu_ready) done_ch_q <= '0;
      else           done_ch_q <= done_ch_q | write_now;
      if (start_i && !active_q) begin
        active_q  <= 1'b1;
        sstride_q <= cfg_i.sstride;
      end else if (active_q && !agu_busy) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
    end
  end

  assign busy_o = active_q;
endmodule
