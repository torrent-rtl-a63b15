// torrent_pkg: types and constants shared by every Torrent block.
//
// A Torrent moves data between cluster memories as a stream of wide beats.
// One beat is DATA_W bits, matching the 64 byte-per-cycle AXI links of the
// system the design targets. The beat is assembled from NC memory channels
// of BANK_W bits each (NC * BANK_W == DATA_W).
//
// The chain configuration ("cfg") sent between Torrents carries six fields:
//   A task id, B address of the previous hop, C address of this hop,
//   D address of the next hop, E total size in bytes, F the DSE access
//   pattern. The field list follows the cfg composition of the published
//   design; the field widths are this implementation's choice. A hop
//   address of all ones (NO_HOP) marks the missing neighbour of the chain's
//   head or tail.
//
// Each cfg frame is one AXI write beat: {type, frame id, body}. The first
// frame's id is the total number of frames, the following frames carry
// their own index (1, 2, ...).
//
// Address map of one Torrent's AXI slave window (this design's choice):
//   addr[31:16] node index, addr[15:14] kind (cfg / grant / finish / data),
//   addr[13:0] offset. Data bursts advance the offset, which wraps inside
//   the window: the receiver places data by its own access pattern, not by
//   the AXI address.
package torrent_pkg;

  // ---------------- widths ----------------
  parameter int unsigned DATA_W   = 512;            // 64 B per beat
  parameter int unsigned BANK_W   = 64;             // one memory bank word
  parameter int unsigned NC       = DATA_W / BANK_W; // memory channels per DSE
  parameter int unsigned BEAT_B   = DATA_W / 8;     // bytes per beat
  parameter int unsigned ADDR_W   = 32;             // AXI address
  parameter int unsigned MADDR_W  = 20;             // byte address in a 1 MB cluster memory
  parameter int unsigned NDIM     = 4;              // temporal loop dimensions of the AGU
  parameter int unsigned BOUND_W  = 16;
  parameter int unsigned ID_W     = 8;              // AXI id
  parameter int unsigned TASK_W   = 8;              // field A
  parameter int unsigned SIZE_W   = 32;             // field E
  parameter int unsigned FID_W    = 8;              // frame identifier
  parameter int unsigned MAX_DST  = 16;             // destinations one task can name
  parameter int unsigned NDST_W   = $clog2(MAX_DST + 1);

  parameter logic [ADDR_W-1:0] NO_HOP = '1;

  // ---------------- backend address map ----------------
  parameter int unsigned KIND_LSB = 14;
  typedef enum logic [1:0] {
    KIND_CFG    = 2'd0,
    KIND_GRANT  = 2'd1,
    KIND_FINISH = 2'd2,
    KIND_DATA   = 2'd3
  } kind_e;

  function automatic logic [ADDR_W-1:0] node_base(input logic [15:0] node);
    return {node, 16'h0000};
  endfunction

  function automatic logic [ADDR_W-1:0] kind_addr(input logic [ADDR_W-1:0] base, input kind_e k);
    logic [ADDR_W-1:0] a;
    a = base;
    a[KIND_LSB +: 2] = k;
    return a;
  endfunction

  // ---------------- data streaming engine configuration (field F) ----------------
  typedef struct packed {
    logic [MADDR_W-1:0]              base;     // byte address of the first beat
    logic [MADDR_W-1:0]              sstride;  // byte distance between channels
    logic [NDIM-1:0][BOUND_W-1:0]    bound;    // iterations per dimension, dim 0 innermost
    logic [NDIM-1:0][MADDR_W-1:0]    tstride;  // byte stride per dimension
  } dse_cfg_t;

  // ---------------- chain cfg packet (fields A..F) ----------------
  typedef enum logic [0:0] {
    REQ_WRITE = 1'b0,   // receiver stores the data (and forwards it if it has a next hop)
    REQ_READ  = 1'b1    // receiver reads its memory and sends the data to its next hop
  } req_type_e;

  typedef struct packed {
    logic [TASK_W-1:0] task_id;   // A
    logic [ADDR_W-1:0] prev_hop;  // B
    logic [ADDR_W-1:0] self_hop;  // C
    logic [ADDR_W-1:0] next_hop;  // D
    logic [SIZE_W-1:0] size;      // E
    dse_cfg_t          dse;       // F
  } chain_cfg_t;

  parameter int unsigned CFG_W   = $bits(chain_cfg_t);
  parameter int unsigned FHDR_W  = 1 + FID_W;   // type + frame id

  // ---------------- task descriptor from the local core ----------------
  typedef enum logic [1:0] {
    TASK_LOCAL = 2'd0,  // copy inside the local memory (data reshuffle)
    TASK_WRITE = 2'd1,  // local memory -> one destination or a chain of destinations
    TASK_READ  = 2'd2   // one remote memory -> local memory
  } task_kind_e;

  typedef struct packed {
    logic [ADDR_W-1:0] hop;   // Torrent base address of the destination / source
    dse_cfg_t          dse;   // its access pattern
  } hop_desc_t;

  typedef struct packed {
    task_kind_e                  kind;
    logic [TASK_W-1:0]           task_id;
    logic [NDST_W-1:0]           n_dst;     // chain length for TASK_WRITE, 1 otherwise
    logic [SIZE_W-1:0]           size;      // bytes, a multiple of BEAT_B
    dse_cfg_t                    rd_dse;    // local read pattern (LOCAL, WRITE)
    dse_cfg_t                    wr_dse;    // local write pattern (LOCAL, READ)
    hop_desc_t [MAX_DST-1:0]     dst;       // chain order, dst[0] first
  } task_desc_t;

  // ---------------- data switch modes ----------------
  typedef enum logic [1:0] {
    SW_LOCAL = 2'd0,   // port 1 -> port 3
    SW_READ  = 2'd1,   // port 1 -> port 2
    SW_WRITE = 2'd2,   // port 4 -> port 3
    SW_CW    = 2'd3    // port 4 -> ports 2 and 3
  } sw_mode_e;

  // ---------------- AXI4 write channels (INCR bursts of full-width beats) ----------------
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;    // beats - 1
  } axi_aw_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              last;
  } axi_w_t;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [1:0]      resp;
  } axi_b_t;

  // ---------------- memory port ----------------
  typedef struct packed {
    logic               we;
    logic [MADDR_W-1:0] addr;    // byte address, BANK_W aligned
    logic [BANK_W-1:0]  wdata;
  } mem_req_t;

endpackage
