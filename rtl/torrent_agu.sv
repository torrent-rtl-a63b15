// torrent_agu: N-dimensional affine address generator of a streaming engine.
//
// After start_i it produces the address sequence
//   addr = base + sum_d i_d * tstride[d],  0 <= i_d < bound[d],
// with dimension 0 innermost, one address per valid/ready handshake. The
// published design gives the AGU's function (N-D affine access); this
// implementation keeps one running base per loop level, so every step is an
// add and a copy with no multiplier. A bound of 0 is treated as 1.
// last_o marks the final address; busy_o is high from start until the
// final address is accepted. start_i is ignored while busy.
module torrent_agu
  import torrent_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               start_i,
  input  dse_cfg_t           cfg_i,
  output logic [MADDR_W-1:0] addr_o,
  output logic               valid_o,
  input  logic               ready_i,
  output logic               last_o,
  output logic               busy_o
);
  dse_cfg_t                       cfg_q;
  logic                           active_q;
  logic [NDIM-1:0][BOUND_W-1:0]   cnt_q;
  logic [NDIM-1:0][MADDR_W-1:0]   lvl_q;
  logic [NDIM-1:0]                wrap;   // dimension d is at its last iteration
  logic [NDIM-1:0]                step;   // dimension d advances on the next handshake

  always_comb begin
    logic below;   // every dimension under d is at its last iteration
    below = 1'b1;
    for (int d = 0; d < NDIM; d++) begin
      wrap[d] = (cnt_q[d] + 1'b1 >= cfg_q.bound[d]);
      // the lowest dimension that has not reached its bound advances
      step[d] = below & ~wrap[d];
      below   = below & wrap[d];
    end
  end

  assign addr_o  = lvl_q[0];
  assign valid_o = active_q;
  assign last_o  = active_q & (&wrap);
  assign busy_o  = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q    <= '0;
      active_q <= 1'b0;
      cnt_q    <= '0;
      lvl_q    <= '0;
    end else if (!active_q) begin
      if (start_i) begin
        cfg_q    <= cfg_i;
        active_q <= 1'b1;
        cnt_q    <= '0;
        for (int d = 0; d < NDIM; d++) lvl_q[d] <= cfg_i.base;
      end
    end else if (ready_i) begin
      if (&wrap) begin
        active_q <= 1'b0;
      end else begin
        for (int d = 0; d < NDIM; d++) begin
          if (step[d]) begin
            cnt_q[d] <= cnt_q[d] + 1'b1;
            lvl_q[d] <= lvl_q[d] + cfg_q.tstride[d];
            for (int e = 0; e < d; e++) begin
              cnt_q[e] <= '0;
              lvl_q[e] <= lvl_q[d] + cfg_q.tstride[d];
            end
          end
        end
      end
    end
  end
endmodule
