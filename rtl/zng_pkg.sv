// zng_pkg: sizes, address fields and message types shared by the ZnG memory system.
//
// The numbers follow the configuration table of ZnG: 16 SMs with up to 80 warps each,
// 128 B GPU memory requests, 4 KB Z-NAND pages, 16 channels with one package each,
// 8 dies x 8 planes per package, 1024 blocks of 384 pages per plane, 8 flash registers per
// plane, an 8 B flash network and 6 L2 banks of 8 ways.  Field widths, message formats and
// encodings are this design's own choices; they are described next to each type.
package zng_pkg;

  // ---------------- configuration (Table of system configurations) ----------------
  localparam int unsigned NUM_SM          = 16;
  localparam int unsigned MAX_WARPS       = 80;
  localparam int unsigned LINE_BYTES      = 128;              // GPU memory request size
  localparam int unsigned LINE_BITS       = LINE_BYTES * 8;
  localparam int unsigned PAGE_BYTES      = 4096;             // Z-NAND page
  localparam int unsigned PAGE_BITS       = PAGE_BYTES * 8;
  localparam int unsigned LINES_PER_PAGE  = PAGE_BYTES / LINE_BYTES; // 32
  localparam int unsigned NUM_CH          = 16;               // channels, 1 package each
  localparam int unsigned DIES            = 8;
  localparam int unsigned PLANES_PER_DIE  = 8;
  localparam int unsigned PLANES          = DIES * PLANES_PER_DIE;   // per package
  localparam int unsigned BLOCKS          = 1024;             // per plane
  localparam int unsigned PAGES           = 384;              // per block
  localparam int unsigned REGS_PER_PLANE  = 8;
  localparam int unsigned FLIT_BITS       = 64;               // 8 B flash network / NiF
  localparam int unsigned FLITS_PER_LINE  = LINE_BITS / FLIT_BITS;   // 16
  localparam int unsigned NUM_L2_BANKS    = 6;
  localparam int unsigned L2_WAYS         = 8;

  // ---------------- address fields ----------------
  localparam int unsigned CH_W   = 4;
  localparam int unsigned DIE_W  = 3;
  localparam int unsigned PL_W   = 3;
  localparam int unsigned BLK_W  = 10;
  localparam int unsigned PG_W   = 9;   // 384 pages need 9 bits; indices 384..511 unused
  localparam int unsigned LN_W   = 5;   // line inside a page
  localparam int unsigned VBN_W  = 14;  // 10240-entry DBMT (80 KB of 8 B entries)
  localparam int unsigned LBN_W  = 20;
  localparam int unsigned PC_W   = 32;
  localparam int unsigned WARP_W = 7;
  localparam int unsigned SM_W   = 4;

  // physical data block number: the block's place in the whole flash array
  typedef struct packed {
    logic [CH_W-1:0]  ch;
    logic [DIE_W-1:0] die;
    logic [PL_W-1:0]  plane;
    logic [BLK_W-1:0] blk;
  } pdbn_t;   // 20 bits

  // flash physical line address: what GPU L1/L2 caches are indexed by
  typedef struct packed {
    pdbn_t            pdbn;
    logic [PG_W-1:0]  page;
    logic [LN_W-1:0]  line;
  } fline_t;  // 34 bits

  // virtual line address issued by an SM
  typedef struct packed {
    logic [VBN_W-1:0] vbn;
    logic [PG_W-1:0]  page;
    logic [LN_W-1:0]  line;
  } vline_t;  // 28 bits

  // one DBMT entry (fits in 8 B): LBN, PDBN and the physical log block inside the same plane
  typedef struct packed {
    logic             valid;
    logic [LBN_W-1:0] lbn;
    pdbn_t            pdbn;
    logic [BLK_W-1:0] plbn;
  } dbmt_entry_t;  // 51 bits

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [PAGE_BITS-1:0] page_t;
  typedef logic [FLIT_BITS-1:0] flitdata_t;

  // request from an SM (fields of the extended memory request: PC, warp ID, R/W, address)
  typedef struct packed {
    logic [PC_W-1:0]   pc;
    logic [WARP_W-1:0] warp;
    logic              wr;
    vline_t            addr;
    line_t             wdata;
  } sm_req_t;

  // translated request travelling from an SM to an L2 bank
  typedef struct packed {
    logic [PC_W-1:0]   pc;
    logic [WARP_W-1:0] warp;
    logic [SM_W-1:0]   sm;
    logic              wr;
    fline_t            addr;
    logic [BLK_W-1:0]  plbn;
    line_t             wdata;
  } l2_req_t;

  // answer from an L2 bank to an SM: read data or write acknowledgement
  typedef struct packed {
    logic [SM_W-1:0] sm;
    logic            wr;
    fline_t          addr;
    line_t           data;
  } l2_resp_t;

  typedef enum logic [1:0] {FC_READ = 2'd0, FC_WRITE = 2'd1, FC_ERASE = 2'd2} fc_cmd_e;

  // request from an L2 bank (or the GC port) to a flash controller
  typedef struct packed {
    fc_cmd_e          cmd;
    logic [2:0]       src;      // requesting L2 bank (NUM_L2_BANKS = the GC port)
    fline_t           addr;
    logic [BLK_W-1:0] plbn;
    logic [5:0]       nlines;   // read: lines starting at addr.line (1..32)
    line_t            wdata;
  } fc_req_t;

  // answer from a flash controller: one read line, or a write / erase acknowledgement
  typedef struct packed {
    fc_cmd_e     cmd;
    logic [2:0]  dst;
    fline_t      addr;
    logic        last;
    logic        err;       // write refused (log block full) / erase of a busy block
    line_t       data;
  } fc_resp_t;

  // ---------------- flash network ----------------
  typedef struct packed {
    logic      head;
    logic      tail;
    flitdata_t data;
  } flit_t;

  // network node numbering of the 8 x 3 mesh: row 0 holds the flash controllers,
  // rows 1 and 2 the 16 packages (package p sits at node 8 + p)
  localparam int unsigned MESH_X = 8;
  localparam int unsigned MESH_Y = 3;
  localparam int unsigned NODE_W = 5;
  localparam int unsigned PKG_NODE0 = 8;

  typedef enum logic [2:0] {
    NC_READ = 3'd0, NC_WRITE = 3'd1, NC_ERASE = 3'd2,
    NC_RDATA = 3'd4, NC_WACK = 3'd5, NC_EACK = 3'd6
  } ncmd_e;

  // header flit of a flash-network packet (64 bits).  On requests nlines is the number of
  // lines to read; on acknowledgements (WACK/EACK) nlines[0] is the error bit (the write or
  // erase was refused) and flag tells that a flash register had to be evicted.
  typedef struct packed {
    logic [NODE_W-1:0] dst;
    logic [NODE_W-1:0] src;
    ncmd_e             cmd;
    logic [BLK_W-1:0]  plbn;
    pdbn_t             pdbn;
    logic [PG_W-1:0]   page;
    logic [LN_W-1:0]   line;
    logic [5:0]        nlines;
    logic              flag;
  } nhdr_t;

endpackage
