// cluster_mem: banked cluster scratchpad shared by several request ports.
//
// The memory of one compute cluster: MEM_BYTES bytes in NBANK banks of
// BANK_W bits, word-interleaved (bank = word address mod NBANK). This
// follows the 1 MB, 32-bank, 64-bit-per-bank cluster memory of the system
// the Torrent was evaluated in. Each of NP ports presents one request per
// cycle (mem_req_t: write enable, byte address, write data). Every bank
// serves one port per cycle; when several ports hit the same bank a
// round-robin pointer per bank chooses, and the others see gnt low and
// must hold their request. A granted read returns its data on rdata with
// rvalid high exactly one cycle after the grant. Port arbitration and the
// one-cycle latency are this design's choice.
module cluster_mem
  import torrent_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 1048576,
  parameter int unsigned NBANK     = 32,
  parameter int unsigned NP        = 2 * NC + 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic     [NP-1:0]           req_i,
  input  mem_req_t [NP-1:0]           req_data_i,
  output logic     [NP-1:0]           gnt_o,
  output logic     [NP-1:0]           rvalid_o,
  output logic     [NP-1:0][BANK_W-1:0] rdata_o
);
  localparam int unsigned WORD_B = BANK_W / 8;
  localparam int unsigned OFF_W  = $clog2(WORD_B);
  localparam int unsigned BSEL_W = $clog2(NBANK);
  localparam int unsigned ROWS   = MEM_BYTES / WORD_B / NBANK;
  localparam int unsigned ROW_W  = $clog2(ROWS);
  localparam int unsigned PSEL_W = $clog2(NP);

  logic [NBANK-1:0]              bank_en, bank_we;
  logic [NBANK-1:0][ROW_W-1:0]   bank_addr;
  logic [NBANK-1:0][BANK_W-1:0]  bank_wdata, bank_rdata;
  logic [NBANK-1:0][PSEL_W-1:0]  rr_q, winner;
  logic [NP-1:0][BSEL_W-1:0]     port_bank;
  logic [NP-1:0]                 rd_q;
  logic [NP-1:0][BSEL_W-1:0]     rd_bank_q;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      port_bank[p] = req_data_i[p].addr[OFF_W +: BSEL_W];
    end
  end

  // per-bank round-robin arbitration
  always_comb begin
    gnt_o      = '0;
    bank_en    = '0;
    bank_we    = '0;
    bank_addr  = '0;
    bank_wdata = '0;
    winner     = '0;
    for (int b = 0; b < NBANK; b++) begin
      for (int k = 0; k < NP; k++) begin
        int unsigned p;
        p = (int'(rr_q[b]) + k) % NP;
        if (!bank_en[b] && req_i[p] && (port_bank[p] == BSEL_W'(b))) begin
          bank_en[b]    = 1'b1;
          bank_we[b]    = req_data_i[p].we;
          bank_addr[b]  = req_data_i[p].addr[OFF_W + BSEL_W +: ROW_W];
          bank_wdata[b] = req_data_i[p].wdata;
          winner[b]     = PSEL_W'(p);
          gnt_o[p]      = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q      <= '0;
      rd_q      <= '0;
      rd_bank_q <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++) begin
        if (bank_en[b]) rr_q[b] <= (int'(winner[b]) == NP - 1) ? '0 : winner[b] + 1'b1;
      end
      for (int p = 0; p < NP; p++) begin
        rd_q[p]      <= gnt_o[p] & ~req_data_i[p].we;
        rd_bank_q[p] <= port_bank[p];
      end
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    mem_bank #(.WIDTH(BANK_W), .ROWS(ROWS)) i_bank (
      .clk_i   (clk_i),
      .en_i    (bank_en[b]),
      .we_i    (bank_we[b]),
      .addr_i  (bank_addr[b]),
      .wdata_i (bank_wdata[b]),
      .rdata_o (bank_rdata[b])
    );
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      rvalid_o[p] = rd_q[p];
      rdata_o[p]  = bank_rdata[rd_bank_q[p]];
    end
  end
endmodule
