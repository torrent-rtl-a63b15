// mem_bank: one single-port SRAM bank of ROWS words of WIDTH bits.
//
// Synchronous write, registered read: a read issued in cycle t returns its
// word in cycle t+1. Written as an array so synthesis can map it to an SRAM
// macro. Contents are not reset.
module mem_bank #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned ROWS  = 4096
) (
  input  logic                     clk_i,
  input  logic                     en_i,
  input  logic                     we_i,
  input  logic [$clog2(ROWS)-1:0]  addr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  output logic [WIDTH-1:0]         rdata_o
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk_i) begin
    if (en_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
