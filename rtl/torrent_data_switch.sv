// torrent_data_switch: routes beats between the Torrent frontend and backend.
//
// Four ports, numbered as in the published design:
//   1  in   from the reading streaming engine (data packer)
//   2  out  to the backend's Stream2AXI (next hop)
//   3  out  to the writing streaming engine (data splitter)
//   4  in   from the backend's AXI2Stream (previous hop)
// and four modes:
//   SW_LOCAL 1->3 (local loopback / reshuffle), SW_READ 1->2,
//   SW_WRITE 4->3, SW_CW 4->2 and 4->3 (Chainwrite: store and forward).
// It is built from the published parts: a DeMux on port 1, a Duplicate on
// port 4, a Mux in front of port 2 and a Mux in front of port 3, plus the
// optional ChainWrite buffer between the Duplicate and the port-2 Mux
// (CW_BUF_DEPTH entries, 0 = absent, the default: the design duplicates
// without storing data). All paths are combinational apart from that
// buffer. mode_i must only change while no beat is in flight.
module torrent_data_switch
  import torrent_pkg::*;
#(
  parameter int unsigned CW_BUF_DEPTH = 0
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  sw_mode_e          mode_i,
  // port 1
  input  logic [DATA_W-1:0] p1_data_i,
  input  logic              p1_valid_i,
  output logic              p1_ready_o,
  // port 2
  output logic [DATA_W-1:0] p2_data_o,
  output logic              p2_valid_o,
  input  logic              p2_ready_i,
  // port 3
  output logic [DATA_W-1:0] p3_data_o,
  output logic              p3_valid_o,
  input  logic              p3_ready_i,
  // port 4
  input  logic [DATA_W-1:0] p4_data_i,
  input  logic              p4_valid_i,
  output logic              p4_ready_o
);
  // DeMux outputs
  logic              dm2_valid, dm3_valid;
  // Duplicate outputs: ch0 -> port 3, ch1 -> port 2 (via the buffer)
  logic [DATA_W-1:0] dup3_data, dup2_data, buf_data;
  logic              dup3_valid, dup3_ready, dup2_valid, dup2_ready;
  logic              buf_valid, buf_ready;
  logic              dup_ready;
  logic              sel1;   // DeMux / Mux select: 1 = port 1 is the source

  assign sel1 = (mode_i == SW_LOCAL) || (mode_i == SW_READ);

  // DeMux on port 1
  assign dm2_valid  = p1_valid_i & (mode_i == SW_READ);
  assign dm3_valid  = p1_valid_i & (mode_i == SW_LOCAL);
  assign p1_ready_o = ((mode_i == SW_READ)  & p2_ready_i) |
                      ((mode_i == SW_LOCAL) & p3_ready_i);

  // Duplicate on port 4
  torrent_stream_dup #(.WIDTH(DATA_W)) i_dup (
    .clk_i, .rst_ni,
    .ch0_en    ((mode_i == SW_WRITE) || (mode_i == SW_CW)),
    .ch1_en    (mode_i == SW_CW),
    .data      (p4_data_i),
    .valid     (p4_valid_i & ~sel1),
    .ready     (dup_ready),
    .ch0_data  (dup3_data),
    .ch0_valid (dup3_valid),
    .ch0_ready (dup3_ready),
    .ch1_data  (dup2_data),
    .ch1_valid (dup2_valid),
    .ch1_ready (dup2_ready)
  );

  // port 4 is only drained in the modes that read it
  assign p4_ready_o = dup_ready & ~sel1;

  // optional ChainWrite buffer
  if (CW_BUF_DEPTH > 0) begin : g_cwbuf
    logic [$clog2(CW_BUF_DEPTH+1)-1:0] unused_count;
    stream_fifo #(.WIDTH(DATA_W), .DEPTH(CW_BUF_DEPTH)) i_buf (
      .clk_i, .rst_ni,
      .flush_i     (1'b0),
      .in_data_i   (dup2_data),
      .in_valid_i  (dup2_valid),
      .in_ready_o  (dup2_ready),
      .out_data_o  (buf_data),
      .out_valid_o (buf_valid),
      .out_ready_i (buf_ready),
      .count_o     (unused_count)
    );
  end else begin : g_nobuf
    assign buf_data   = dup2_data;
    assign buf_valid  = dup2_valid;
    assign dup2_ready = buf_ready;
  end

  // Mux in front of port 2
  assign p2_data_o  = sel1 ? p1_data_i : buf_data;
  assign p2_valid_o = sel1 ? dm2_valid : buf_valid;
  assign buf_ready  = ~sel1 & p2_ready_i;

  // Mux in front of port 3
  assign p3_data_o  = sel1 ? p1_data_i : dup3_data;
  assign p3_valid_o = sel1 ? dm3_valid : dup3_valid;
  assign dup3_ready = ~sel1 & p3_ready_i;
endmodule
