// torrent_stream2axi: backend path from the data switch (port 2) to AXI.
//
// After start_i it sends beats_i beats from its input stream as AXI4 INCR
// write bursts of up to BURST_BEATS full-width beats, starting at addr_i
// (the data window of the next hop) and advancing the address by the burst
// size; the offset wraps inside the window, so the message-kind bits of
// the address never change. A burst's AW is only issued once its first beat is at the input,
// and only while allow_i is high (the backend uses this to give control
// messages priority on the shared master port). W beats follow AW in
// order; WLAST marks each burst's final beat. done_o pulses after the last
// beat is accepted; write responses are consumed by the backend.
// busy_o is high from the AW handshake to the WLAST handshake, i.e. while
// the master port must not be taken from this block.
// The published design gives this block's name and function; burst length
// and the ordering rules are this design's choice.
module torrent_stream2axi
  import torrent_pkg::*;
#(
  parameter int unsigned BURST_BEATS = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic [ADDR_W-1:0] addr_i,
  input  logic [SIZE_W-1:0] beats_i,
  input  logic              allow_i,
  output logic              busy_o,
  output logic              done_o,
  // input stream
  input  logic [DATA_W-1:0] in_data_i,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  // AXI write address / data
  output axi_aw_t           aw_o,
  output logic              aw_valid_o,
  input  logic              aw_ready_i,
  output axi_w_t            w_o,
  output logic              w_valid_o,
  input  logic              w_ready_i
);
  logic              active_q, in_burst_q;
  logic [SIZE_W-1:0] rem_q;
  logic [8:0]        left_q;
  logic [ADDR_W-1:0] addr_q;
  logic [8:0]        blen;

  assign blen = (rem_q >= SIZE_W'(BURST_BEATS)) ? 9'(BURST_BEATS) : 9'(rem_q);

  assign aw_o.id    = '0;
  assign aw_o.addr  = addr_q;
  assign aw_o.len   = 8'(blen - 1'b1);
  assign aw_valid_o = active_q & ~in_burst_q & (rem_q != '0) & in_valid_i & allow_i;

  assign w_o.data   = in_data_i;
  assign w_o.last   = (left_q == 9'd1);
  assign w_valid_o  = in_burst_q & in_valid_i;
  assign in_ready_o = in_burst_q & w_ready_i;
  assign busy_o     = in_burst_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q   <= 1'b0;
      in_burst_q <= 1'b0;
      rem_q      <= '0;
      left_q     <= '0;
      addr_q     <= '0;
      done_o     <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!active_q) begin
        if (start_i) begin
          active_q <= 1'b1;
          rem_q    <= beats_i;
          addr_q   <= addr_i;
        end
      end else if (!in_burst_q) begin
        if (rem_q == '0) begin
          active_q <= 1'b0;
          done_o   <= 1'b1;
        end else if (aw_valid_o && aw_ready_i) begin
          in_burst_q <= 1'b1;
          left_q     <= blen;
          addr_q[KIND_LSB-1:0] <= addr_q[KIND_LSB-1:0] + KIND_LSB'(blen) * KIND_LSB'(BEAT_B);
        end
      end else if (w_valid_o && w_ready_i) begin
        left_q <= left_q - 1'b1;
        rem_q  <= rem_q - 1'b1;
        if (left_q == 9'd1) in_burst_q <= 1'b0;
      end
    end
  end

  // AXI: a valid address or data beat is held until accepted
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   w_valid_o & ~w_ready_i |=> w_valid_o);
endmodule
