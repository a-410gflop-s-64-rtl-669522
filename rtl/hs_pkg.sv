// Shared types and constants of the shared-L1 cluster.
//
// The cluster has 64 cores in 4 Groups of 4 Tiles of 4 cores, and 256 L1
// banks of 1 KiB (16 per Tile). L1 word addresses are interleaved across all
// 256 banks, so consecutive 32-bit words fall in consecutive banks:
//   addr[1:0]   byte in word
//   addr[5:2]   bank within the Tile     (16 banks)
//   addr[7:6]   Tile within the Group    (4 Tiles)
//   addr[9:8]   Group                    (4 Groups)
//   addr[17:10] row within the bank      (256 words of 32 bit)
// The counts and sizes follow the paper; the bit order of the interleaving
// fields (bank fastest, then Tile, then Group) is this design's choice.
//
// A request on the L1 interconnect carries the requesting core's global id
// and a tag (0 = the core's load/store unit, 1..NumQlr = one of its QLRs) so
// that responses can be routed back through the same hierarchy.
package hs_pkg;

  localparam int unsigned DataWidth        = 32;
  localparam int unsigned AddrWidth        = 32;
  localparam int unsigned NumGroups        = 4;
  localparam int unsigned NumTilesPerGroup = 4;
  localparam int unsigned NumCoresPerTile  = 4;
  localparam int unsigned NumBanksPerTile  = 16;
  localparam int unsigned BankWords        = 256;   // 1 KiB of 32-bit words
  localparam int unsigned NumRemotePorts   = 4;     // Req_o[0:3] / Rsp_i[0:3]
  localparam int unsigned NumQlr           = 4;     // QLRs per core
  localparam int unsigned QlrDepth         = 4;     // FIFO entries per QLR
  localparam int unsigned QueueDepth       = 4;     // words of the queue in each bank

  localparam int unsigned NumTiles = NumGroups * NumTilesPerGroup;
  localparam int unsigned NumCores = NumTiles * NumCoresPerTile;
  localparam int unsigned NumBanks = NumTiles * NumBanksPerTile;

  localparam int unsigned CoreIdWidth = $clog2(NumCores);   // 6
  localparam int unsigned TagWidth    = 3;
  localparam int unsigned BankIdxW    = $clog2(NumBanksPerTile);
  localparam int unsigned TileIdxW    = $clog2(NumTilesPerGroup);
  localparam int unsigned GroupIdxW   = $clog2(NumGroups);
  localparam int unsigned RowW        = $clog2(BankWords);

  // Address field positions.
  localparam int unsigned BankLsb  = 2;
  localparam int unsigned TileLsb  = BankLsb + BankIdxW;    // 6
  localparam int unsigned GroupLsb = TileLsb + TileIdxW;    // 8
  localparam int unsigned RowLsb   = GroupLsb + GroupIdxW;  // 10

  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,
    OP_STORE = 2'd1,
    OP_QPUSH = 2'd2,   // append wdata to the bank's queue
    OP_QPOP  = 2'd3    // remove the oldest word of the bank's queue
  } mem_op_e;

  typedef logic [CoreIdWidth-1:0] core_id_t;
  typedef logic [TagWidth-1:0]    tag_t;

  typedef struct packed {
    logic [AddrWidth-1:0] addr;
    mem_op_e              op;
    logic [DataWidth-1:0] wdata;
    logic [3:0]           be;
    core_id_t             src;
    tag_t                 tag;
  } mem_req_t;

  typedef struct packed {
    logic [DataWidth-1:0] rdata;
    logic                 ok;     // 0: queue full (push) or empty (pop), retry
    core_id_t             src;
    tag_t                 tag;
  } mem_rsp_t;

  // QLR configuration.
  typedef enum logic [1:0] {
    QLR_OFF    = 2'd0,
    QLR_MEM    = 2'd1,   // the queue lives in the L1 bank at cfg.addr
    QLR_DIRECT = 2'd2    // direct link to another core of the same Tile
  } qlr_mode_e;

  typedef struct packed {
    qlr_mode_e            mode;
    logic                 push;      // 1: push-QLR (core writes), 0: pop-QLR (core reads)
    logic [AddrWidth-1:0] addr;      // queue address (QLR_MEM)
    logic [1:0]           src_core;  // feeding core in the Tile (pop, QLR_DIRECT)
    logic [1:0]           src_qlr;   // feeding push-QLR of that core (pop, QLR_DIRECT)
    logic [15:0]          count;     // elements to move, 0 = unlimited
  } qlr_cfg_t;

  // Field helpers.
  function automatic logic [GroupIdxW-1:0] addr_group(logic [AddrWidth-1:0] a);
    return a[GroupLsb +: GroupIdxW];
  endfunction
  function automatic logic [TileIdxW-1:0] addr_tile(logic [AddrWidth-1:0] a);
    return a[TileLsb +: TileIdxW];
  endfunction
  function automatic logic [BankIdxW-1:0] addr_bank(logic [AddrWidth-1:0] a);
    return a[BankLsb +: BankIdxW];
  endfunction
  function automatic logic [RowW-1:0] addr_row(logic [AddrWidth-1:0] a);
    return a[RowLsb +: RowW];
  endfunction
  // Core id = {group, tile, core}.
  function automatic logic [GroupIdxW-1:0] id_group(core_id_t id);
    return id[CoreIdWidth-1 -: GroupIdxW];
  endfunction
  function automatic logic [TileIdxW-1:0] id_tile(core_id_t id);
    return id[1+TileIdxW -: TileIdxW];
  endfunction
  function automatic logic [1:0] id_core(core_id_t id);
    return id[1:0];
  endfunction

endpackage
