// stream_fifo: valid/ready FIFO of DEPTH entries of WIDTH bits.
//
// Used for the per-channel buffers of the data streaming engines and for
// the optional ChainWrite buffer of the data switch. The input is ready
// while the FIFO is not full, the output is valid while it is not empty;
// a push and a pop may happen in the same cycle. Data written is visible
// at the output one cycle later (no fall-through). `count` gives the fill
// level so that a reader can reserve space before a memory request.
// The published design only names these FIFOs; depth and behaviour are this
// implementation's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       flush_i,
  input  logic [WIDTH-1:0]           in_data_i,
  input  logic                       in_valid_i,
  output logic                       in_ready_o,
  output logic [WIDTH-1:0]           out_data_o,
  output logic                       out_valid_o,
  input  logic                       out_ready_i,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0]           mem_q [DEPTH];
  logic [PW-1:0]              rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic                       push, pop;

  assign in_ready_o  = (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_q];
  assign count_o     = cnt_q;
  assign push        = in_valid_i & in_ready_o;
  assign pop         = out_valid_o & out_ready_i;

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (flush_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= in_data_i;
  end

  // a full FIFO never accepts, an empty one never delivers
  assert property (@(posedge clk_i) disable iff (!rst_ni) 32'(cnt_q) <= DEPTH);
endmodule
