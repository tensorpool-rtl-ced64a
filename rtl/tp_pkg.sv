// Shared constants and types of the TensorPool cluster.
//
// The cluster is built from 64 Tiles (4 Tiles per SubGroup, 4 SubGroups per
// Group, 4 Groups). Each Tile holds 32 word-wide L1 banks of 2 KiB, giving a
// 4 MiB shared scratchpad, and one Tile in each SubGroup holds a tensor engine
// (TE) with a 32 x 8 array of FP16 FMAs that have 3 pipeline stages. These
// numbers are the paper's. The address map, the request/response records and
// the field widths below are choices of this implementation:
//
//   byte address [21:0]:  [1:0] byte in word, [6:2] bank in Tile,
//                         [12:7] Tile (= {group, subgroup, tile-in-SG}),
//                         [21:13] row in bank.
//
// Word-level interleaving over the banks of one Tile means that a 64-byte
// aligned 512-bit line always lies in 16 consecutive banks of a single Tile,
// which is what lets a wide TE access travel as a single burst.
package tp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_GROUPS    = 4;
  localparam int unsigned SG_PER_GROUP  = 4;
  localparam int unsigned TILES_PER_SG  = 4;
  localparam int unsigned NUM_TILES     = NUM_GROUPS * SG_PER_GROUP * TILES_PER_SG; // 64
  localparam int unsigned PES_PER_TILE  = 4;
  localparam int unsigned BANKS_PER_TILE = 32;
  localparam int unsigned BANK_WORDS    = 512;      // 2 KiB of 32-bit words
  localparam int unsigned NUM_REMOTE    = 7;        // 4 SubGroup + 3 Group ports

  localparam int unsigned ADDR_W        = 22;       // 4 MiB
  localparam int unsigned BANK_SEL_W    = 5;
  localparam int unsigned TILE_SEL_W    = 6;
  localparam int unsigned ROW_W         = 9;

  // Burst / grouping factors (paper: K = 4 responses per handshake,
  // J = 2 write words per request, 512-bit TE lines = 16 words).
  localparam int unsigned K_GRP         = 4;
  localparam int unsigned J_GRP         = 2;
  localparam int unsigned LINE_WORDS    = 16;
  localparam int unsigned LINE_W        = LINE_WORDS * 32;   // 512

  // Tensor engine geometry (paper: R = 32, C = 8, P = 3).
  localparam int unsigned TE_R          = 32;
  localparam int unsigned TE_C          = 8;
  localparam int unsigned TE_P          = 3;
  localparam int unsigned TE_TILE_N     = TE_C * (TE_P + 1);  // 32 Z columns per tile
  localparam int unsigned ROB_DEPTH     = 16;
  localparam int unsigned ZFIFO_DEPTH   = 32;
  localparam int unsigned NUM_TAGS      = 16;       // outstanding TE reads
  localparam int unsigned TAG_W         = 4;

  // Port indices inside a Tile for response routing.
  localparam int unsigned PORT_W        = 3;        // 0..3 = PE, 4 = TE
  localparam int unsigned TE_PORT       = 4;

  // ---------------------------------------------------------------- address helpers
  function automatic logic [BANK_SEL_W-1:0] addr_bank(input logic [ADDR_W-1:0] a);
    return a[2 +: BANK_SEL_W];
  endfunction
  function automatic logic [TILE_SEL_W-1:0] addr_tile(input logic [ADDR_W-1:0] a);
    return a[2+BANK_SEL_W +: TILE_SEL_W];
  endfunction
  function automatic logic [ROW_W-1:0] addr_row(input logic [ADDR_W-1:0] a);
    return a[2+BANK_SEL_W+TILE_SEL_W +: ROW_W];
  endfunction

  // Index (0..6) of the remote port a Tile uses to reach target Tile `dst`
  // from Tile `src`: 0..3 = relative SubGroup inside the own Group, 4..6 =
  // relative Group.
  function automatic logic [2:0] remote_port(input logic [TILE_SEL_W-1:0] src,
                                             input logic [TILE_SEL_W-1:0] dst);
    logic [1:0] dg, dsg;
    dg  = dst[5:4] - src[5:4];
    dsg = dst[3:2] - src[3:2];
    if (dg != 2'd0) return 3'(3 + dg);
    return {1'b0, dsg};
  endfunction

  // ---------------------------------------------------------------- narrow PE port
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              we;
    logic [3:0]        be;
    logic [31:0]       wdata;
  } pe_req_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        we;        // 1: write acknowledge, 0: read data
  } pe_rsp_t;

  // ---------------------------------------------------------------- remote interconnect records
  // len: number of words minus one (0 narrow, J-1 grouped write, 15 read burst).
  typedef struct packed {
    logic [ADDR_W-1:0]      addr;
    logic                   we;
    logic [3:0]             len;
    logic [J_GRP*4-1:0]     be;
    logic [J_GRP*32-1:0]    wdata;
    logic [TILE_SEL_W-1:0]  src_tile;
    logic [PORT_W-1:0]      src_port;
    logic [TAG_W-1:0]       tag;
  } rreq_t;

  typedef struct packed {
    logic [K_GRP*32-1:0]    rdata;
    logic [3:0]             offs;     // word offset of rdata[31:0] inside the line
    logic                   we;       // write acknowledge
    logic [TILE_SEL_W-1:0]  src_tile; // requester (destination of this response)
    logic [PORT_W-1:0]      src_port;
    logic [TAG_W-1:0]       tag;
  } rrsp_t;

  localparam int unsigned RREQ_W = $bits(rreq_t);
  localparam int unsigned RRSP_W = $bits(rrsp_t);

  // ---------------------------------------------------------------- TE wide port
  typedef struct packed {
    logic [ADDR_W-1:0]  addr;     // 64-byte aligned
    logic               we;
    logic [LINE_W-1:0]  wdata;
    logic [TAG_W-1:0]   tag;
  } wreq_t;

  // Local (same-Tile) line response: all 16 words in one beat.
  typedef struct packed {
    logic [LINE_W-1:0]  rdata;
    logic               we;
    logic [TAG_W-1:0]   tag;
  } wrsp_t;

  // ---------------------------------------------------------------- local crossbar master request
  // A master asks for `len+1` consecutive words starting at bank `bank` of row `row`.
  typedef struct packed {
    logic [ROW_W-1:0]       row;
    logic [BANK_SEL_W-1:0]  bank;
    logic [3:0]             len;
    logic                   we;
    logic [LINE_WORDS*4-1:0]  be;
    logic [LINE_W-1:0]      wdata;
  } lreq_t;

  // ---------------------------------------------------------------- TE configuration
  // Register map (word offsets) of the TE controller.
  typedef enum logic [3:0] {
    CFG_X_ADDR  = 4'd0,
    CFG_W_ADDR  = 4'd1,
    CFG_Y_ADDR  = 4'd2,
    CFG_Z_ADDR  = 4'd3,
    CFG_M       = 4'd4,   // rows of X, Y, Z
    CFG_N       = 4'd5,   // columns of X = rows of W
    CFG_K       = 4'd6,   // columns of W, Y, Z
    CFG_W_START = 4'd7,   // first 32-column W/Z block (interleaved access)
    CFG_TRIGGER = 4'd8,   // write: start; read: busy
    CFG_STATUS  = 4'd9    // read: number of completed jobs
  } cfg_reg_e;

  typedef struct packed {
    logic        valid;
    logic        we;
    logic [3:0]  addr;
    logic [31:0] wdata;
  } cfg_req_t;

endpackage
