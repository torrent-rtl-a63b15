// torrent_stream_dup: the stream duplicator of the Torrent data switch.
//
// Forks one valid/ready stream into two output channels, each enabled by
// ch0_en / ch1_en. The port names and the two served-flags C0 and C1 are
// those of the published duplicator. A beat is offered to every enabled
// channel that has not yet taken it; a channel that accepts early is
// remembered in its flag (C0 or C1) and is not offered the beat again.
// The input is acknowledged in the cycle the last enabled channel
// accepts, and the flags clear then. So each enabled channel receives
// every beat exactly once, no data is stored (only the two flags), and a
// beat passes in the same cycle when both channels are ready. A disabled
// channel never sees valid and never holds the input back.
module torrent_stream_dup #(
  parameter int unsigned WIDTH = 512
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             ch0_en,
  input  logic             ch1_en,
  input  logic [WIDTH-1:0] data,
  input  logic             valid,
  output logic             ready,
  output logic [WIDTH-1:0] ch0_data,
  output logic             ch0_valid,
  input  logic             ch0_ready,
  output logic [WIDTH-1:0] ch1_data,
  output logic             ch1_valid,
  input  logic             ch1_ready
);
  logic c0_q, c1_q;           // channel already served for the current beat
  logic ch0_fire, ch1_fire;

  assign ch0_data  = data;
  assign ch1_data  = data;
  assign ch0_valid = valid & ch0_en & ~c0_q;
  assign ch1_valid = valid & ch1_en & ~c1_q;
  assign ch0_fire  = ch0_valid & ch0_ready;
  assign ch1_fire  = ch1_valid & ch1_ready;
  assign ready     = (~ch0_en | c0_q | ch0_ready) & (~ch1_en | c1_q | ch1_ready);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      c0_q <= 1'b0;
      c1_q <= 1'b0;
    end else if (valid & ready) begin
      c0_q <= 1'b0;
      c1_q <= 1'b0;
    end else begin
      c0_q <= c0_q | ch0_fire;
      c1_q <= c1_q | ch1_fire;
    end
  end

  // an offered beat stays until it is taken
  assert property (@(posedge clk_i) disable iff (!rst_ni) valid & ~ready |=> valid);
endmodule
