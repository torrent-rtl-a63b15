// noc_model: behavioural stand-in for the AXI network-on-chip.
//
// Not part of the design. A crossbar between N AXI4 write masters and N
// write slaves, used by the testbenches in place of the mesh NoC the
// Torrents are meant to run on. A write goes to slave addr[31:16]. Each
// slave serves one burst at a time (AW, then its W beats, then B); when
// several masters want the same slave a rotating priority picks one.
// A write the slave does not accept does not block the others: the
// priority moves on every cycle it waits. The master index is put into the AW id so that B returns to the right
// master. HOP_LAT adds that many idle cycles before every AW is passed
// on, a crude stand-in for the NoC's path latency.
module noc_model
  import torrent_pkg::*;
#(
  parameter int unsigned N       = 4,
  parameter int unsigned HOP_LAT = 0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  axi_aw_t [N-1:0]       m_aw_i,
  input  logic    [N-1:0]       m_aw_valid_i,
  output logic    [N-1:0]       m_aw_ready_o,
  input  axi_w_t  [N-1:0]       m_w_i,
  input  logic    [N-1:0]       m_w_valid_i,
  output logic    [N-1:0]       m_w_ready_o,
  output axi_b_t  [N-1:0]       m_b_o,
  output logic    [N-1:0]       m_b_valid_o,
  input  logic    [N-1:0]       m_b_ready_i,
  output axi_aw_t [N-1:0]       s_aw_o,
  output logic    [N-1:0]       s_aw_valid_o,
  input  logic    [N-1:0]       s_aw_ready_i,
  output axi_w_t  [N-1:0]       s_w_o,
  output logic    [N-1:0]       s_w_valid_o,
  input  logic    [N-1:0]       s_w_ready_i,
  input  axi_b_t  [N-1:0]       s_b_i,
  input  logic    [N-1:0]       s_b_valid_i,
  output logic    [N-1:0]       s_b_ready_o
);
  int unsigned owner_q [N];     // slave -> master of the burst in progress
  logic [N-1:0] sbusy_q;        // slave is in its W phase
  int unsigned target_q [N];    // master -> slave of its W beats
  logic [N-1:0] mbusy_q;        // master is in its W phase
  int unsigned rr_q [N];
  int unsigned wait_q [N];      // per master: cycles its AW has waited
  int unsigned aw_pick [N];
  logic [N-1:0] aw_has;
  int unsigned stat_aw;

  function automatic int unsigned dest(input axi_aw_t aw);
    return int'(aw.addr[31:16]);
  endfunction

  always_comb begin
    m_aw_ready_o = '0;
    m_w_ready_o  = '0;
    m_b_valid_o  = '0;
    s_b_ready_o  = '0;
    s_aw_valid_o = '0;
    s_w_valid_o  = '0;
    aw_has       = '0;
    for (int s = 0; s < N; s++) begin
      s_aw_o[s] = '0;
      s_w_o[s]  = '0;
      aw_pick[s] = 0;
    end
    for (int m = 0; m < N; m++) m_b_o[m] = '0;
    // address phase
    for (int s = 0; s < N; s++) begin
      if (!sbusy_q[s]) begin
        for (int k = 0; k < N; k++) begin
          int unsigned m;
          m = (rr_q[s] + k) % N;
          if (!aw_has[s] && m_aw_valid_i[m] && !mbusy_q[m] && dest(m_aw_i[m]) == s &&
              wait_q[m] >= HOP_LAT) begin
            aw_has[s]       = 1'b1;
            aw_pick[s]      = m;
            s_aw_o[s]       = m_aw_i[m];
            s_aw_o[s].id    = ID_W'(m);
            s_aw_valid_o[s] = 1'b1;
            m_aw_ready_o[m] = s_aw_ready_i[s];
          end
        end
      end
    end
    // data phase
    for (int s = 0; s < N; s++) begin
      if (sbusy_q[s]) begin
        s_w_o[s]       = m_w_i[owner_q[s]];
        s_w_valid_o[s] = m_w_valid_i[owner_q[s]];
        m_w_ready_o[owner_q[s]] = s_w_ready_i[s];
      end
    end
    // responses: lowest slave first
    for (int s = 0; s < N; s++) begin
      int unsigned m;
      m = int'(s_b_i[s].id);
      if (s_b_valid_i[s] && m < N && !m_b_valid_o[m]) begin
        m_b_valid_o[m] = 1'b1;
        m_b_o[m]       = s_b_i[s];
        s_b_ready_o[s] = m_b_ready_i[m];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sbusy_q <= '0;
      mbusy_q <= '0;
      stat_aw <= 0;
      for (int i = 0; i < N; i++) begin
        owner_q[i]  <= 0;
        target_q[i] <= 0;
        rr_q[i]     <= 0;
        wait_q[i]   <= 0;
      end
    end else begin
      for (int m = 0; m < N; m++) begin
        if (m_aw_valid_i[m] && !mbusy_q[m] && !m_aw_ready_o[m]) wait_q[m] <= wait_q[m] + 1;
        else if (m_aw_ready_o[m] || !m_aw_valid_i[m])            wait_q[m] <= 0;
      end
      for (int s = 0; s < N; s++) begin
        if (aw_has[s] && s_aw_ready_i[s]) begin
          sbusy_q[s]            <= 1'b1;
          owner_q[s]            <= aw_pick[s];
          mbusy_q[aw_pick[s]]   <= 1'b1;
          target_q[aw_pick[s]]  <= s;
          rr_q[s]               <= (aw_pick[s] + 1) % N;
          stat_aw               <= stat_aw + 1;
        end else if (aw_has[s]) begin
          // the picked write is held back by the slave: let the others try
          rr_q[s] <= (aw_pick[s] + 1) % N;
        end
        if (sbusy_q[s] && s_w_valid_o[s] && s_w_ready_i[s] && s_w_o[s].last) begin
          sbusy_q[s]          <= 1'b0;
          mbusy_q[owner_q[s]] <= 1'b0;
        end
      end
    end
  end
endmodule
