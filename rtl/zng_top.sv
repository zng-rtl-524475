// zng_top: the ZnG memory system, from the SMs' load/store ports down to the Z-NAND packages.
//
// ZnG replaces GPU DRAM by Z-NAND flash placed on the GPU board.  A request from an SM
// carries a virtual line address plus the PC and warp ID of the instruction.  Path of a
// request (numbers as in the paper's overview):
//   (1) the SM's TLB (zng_tlb) translates it with the block mapping table kept in the MMU
//       (zng_mmu): virtual block -> physical data block (PDBN) and physical log block (PLBN);
//   (2) the GPU network (zng_xbar) brings it to the L2 bank of its line (l2_bank, STT-MRAM,
//       read-only, with PC-based prefetch and an access monitor);
//   (3) on a miss, or for any write, the bank sends it over the GPU network to one of the
//       flash controllers (flash_ctrl), chosen by page address;
//   (4) the controller sends a command packet over the flash network (flash_mesh) to the
//       package of the block's channel (znand_package), whose flash registers absorb writes
//       and whose programmable row decoders remap pages to log blocks.
// Answers flow back the same way.  The SMs, the GC helper thread and its log block mapping
// table are software or existing GPU parts: their connections are ports of this module.
//
// Defaults are the paper's configuration: 16 SMs, 6 L2 banks of 4096 sets x 8 ways (24 MB),
// 16 channels with one package each, 64 planes per package, 8 registers per plane,
// 1024 blocks of 384 pages.  The number of flash controllers (8), TLB size (32) and log
// blocks per plane (8) are this design's choices.  Mesh: 8 columns; row 0 holds the
// controllers (NUM_FC <= 8), the packages follow from node 8 on.
module zng_top
  import zng_pkg::*;
#(
  parameter int unsigned N_SM          = NUM_SM,
  parameter int unsigned N_BANKS       = NUM_L2_BANKS,
  parameter int unsigned N_FC          = 8,
  parameter int unsigned N_PKG         = NUM_CH,
  parameter int unsigned L2_SETS       = 4096,
  parameter int unsigned TLB_ENTRIES   = 32,
  parameter int unsigned DBMT_ENTRIES  = 10240,
  parameter int unsigned N_PLANES      = PLANES,
  parameter int unsigned N_BLOCKS      = BLOCKS,
  parameter int unsigned N_PAGES       = PAGES,
  parameter int unsigned LOG_BLOCKS    = 8,
  parameter int unsigned GC_MARGIN     = 8,
  parameter int unsigned TR_CYCLES     = 3600,
  parameter int unsigned TPROG_CYCLES  = 120000,
  parameter int unsigned TBERS_CYCLES  = 1200000,
  parameter int unsigned MON_WINDOW    = 64,
  parameter int unsigned TC_WINDOW     = 32,
  localparam int unsigned NY = 1 + (N_PKG + MESH_X - 1) / MESH_X,
  localparam int unsigned NN = MESH_X * NY
) (
  input  logic        clk,
  input  logic        rst_n,
  // SM load/store ports
  input  logic        sm_req_valid [N_SM],
  input  sm_req_t     sm_req       [N_SM],
  output logic        sm_req_ready [N_SM],
  output logic        sm_resp_valid[N_SM],
  output l2_resp_t    sm_resp      [N_SM],
  input  logic        sm_resp_ready[N_SM],
  output logic        sm_fault     [N_SM],
  // GC helper thread: DBMT updates, flash commands, log-block alerts
  input  logic             dbmt_upd_valid,
  input  logic [VBN_W-1:0] dbmt_upd_vbn,
  input  dbmt_entry_t      dbmt_upd_entry,
  input  logic        gc_req_valid,
  input  fc_req_t     gc_req,
  output logic        gc_req_ready,
  output logic        gc_resp_valid,
  output fc_resp_t    gc_resp,
  input  logic        gc_resp_ready,
  output logic        gc_alert     [N_PKG],
  // activity counters
  output logic [31:0] st_tlb_miss  [N_SM],
  output logic [31:0] st_l2        [N_BANKS][9],
  output logic [31:0] st_pkg       [N_PKG][9],
  output logic [31:0] st_thrash    [N_FC],
  output logic        redirect
);
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;
  localparam int unsigned SMW = (N_SM > 1) ? $clog2(N_SM) : 1;
  localparam int unsigned FW = (N_FC > 1) ? $clog2(N_FC) : 1;
  localparam int unsigned B1W = $clog2(N_BANKS + 1);

  // ---------------- TLBs and MMU ----------------
  logic             t_valid [N_SM], t_ready [N_SM];
  l2_req_t          t_req   [N_SM];
  logic             m_valid [N_SM], m_ready [N_SM], m_rsp_v [N_SM];
  logic [VBN_W-1:0] m_vbn   [N_SM];
  dbmt_entry_t      m_entry;
  logic             m_fault, sd_valid;
  logic [VBN_W-1:0] sd_vbn;
  logic [31:0]      tlb_hits [N_SM];

  zng_mmu #(.NUM_REQ(N_SM), .ENTRIES(DBMT_ENTRIES)) u_mmu (
    .clk, .rst_n, .req_valid(m_valid), .req_vbn(m_vbn), .req_ready(m_ready),
    .rsp_valid(m_rsp_v), .rsp_entry(m_entry), .rsp_fault(m_fault),
    .upd_valid(dbmt_upd_valid), .upd_vbn(dbmt_upd_vbn), .upd_entry(dbmt_upd_entry),
    .sd_valid, .sd_vbn);

  for (genvar s = 0; s < N_SM; s++) begin : g_sm
    zng_tlb #(.ENTRIES(TLB_ENTRIES), .SM_ID(s)) u_tlb (
      .clk, .rst_n, .in_valid(sm_req_valid[s]), .in_req(sm_req[s]), .in_ready(sm_req_ready[s]),
      .out_valid(t_valid[s]), .out_req(t_req[s]), .out_ready(t_ready[s]), .fault(sm_fault[s]),
      .mmu_valid(m_valid[s]), .mmu_vbn(m_vbn[s]), .mmu_ready(m_ready[s]),
      .mmu_rsp_valid(m_rsp_v[s]), .mmu_rsp_entry(m_entry), .mmu_rsp_fault(m_fault),
      .sd_valid, .sd_vbn, .hits(tlb_hits[s]), .misses(st_tlb_miss[s]));
  end

  // ---------------- GPU network: SM -> L2 bank ----------------
  logic          b_valid [N_BANKS], b_ready [N_BANKS];
  l2_req_t       b_req   [N_BANKS];
  logic [BW-1:0] t_dest  [N_SM];
  always_comb
    for (int s = 0; s < N_SM; s++) t_dest[s] = BW'(34'(t_req[s].addr) % 34'(N_BANKS));

  zng_xbar #(.T(l2_req_t), .N_IN(N_SM), .N_OUT(N_BANKS)) u_net_req (
    .clk, .rst_n, .in_valid(t_valid), .in_data(t_req), .in_dest(t_dest), .in_ready(t_ready),
    .out_valid(b_valid), .out_data(b_req), .out_ready(b_ready));

  // ---------------- L2 banks ----------------
  logic          br_valid [N_BANKS], br_ready [N_BANKS];
  l2_resp_t      br       [N_BANKS];
  logic          bf_valid [N_BANKS+1], bf_ready [N_BANKS+1];
  fc_req_t       bf       [N_BANKS+1];
  logic [FW-1:0] bf_dest  [N_BANKS+1];
  logic          fb_valid [N_BANKS+1], fb_ready [N_BANKS+1];
  fc_resp_t      fb       [N_BANKS+1];
  logic          thrash   [N_FC];

  always_comb begin
    redirect = 1'b0;
    for (int f = 0; f < N_FC; f++) redirect |= thrash[f];
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    l2_bank #(.SETS(L2_SETS), .NUM_BANKS(N_BANKS), .BANK_ID(b), .MON_WINDOW(MON_WINDOW)) u_l2 (
      .clk, .rst_n, .req_valid(b_valid[b]), .req(b_req[b]), .req_ready(b_ready[b]),
      .resp_valid(br_valid[b]), .resp(br[b]), .resp_ready(br_ready[b]),
      .fc_valid(bf_valid[b]), .fc_req(bf[b]), .fc_ready(bf_ready[b]),
      .fcr_valid(fb_valid[b]), .fcr(fb[b]), .fcr_ready(fb_ready[b]),
      .redirect,
      .st_rd_hits(st_l2[b][0]), .st_rd_miss(st_l2[b][1]), .st_prefetch(st_l2[b][2]),
      .st_redirect(st_l2[b][3]), .st_writeback(st_l2[b][4]), .st_evict(st_l2[b][5]),
      .st_gran_shrink(st_l2[b][6]), .st_gran_grow(st_l2[b][7]), .st_gran_lines(st_l2[b][8][5:0]));
    assign st_l2[b][8][31:6] = '0;
  end

  // ---------------- GPU network: L2 bank -> SM ----------------
  logic [SMW-1:0] br_dest [N_BANKS];
  always_comb for (int b = 0; b < N_BANKS; b++) br_dest[b] = SMW'(br[b].sm);
  zng_xbar #(.T(l2_resp_t), .N_IN(N_BANKS), .N_OUT(N_SM)) u_net_rsp (
    .clk, .rst_n, .in_valid(br_valid), .in_data(br), .in_dest(br_dest), .in_ready(br_ready),
    .out_valid(sm_resp_valid), .out_data(sm_resp), .out_ready(sm_resp_ready));

  // ---------------- GPU network: L2 bank / GC port -> flash controller ----------------
  assign bf_valid[N_BANKS] = gc_req_valid;
  assign bf[N_BANKS]       = gc_req;
  assign gc_req_ready      = bf_ready[N_BANKS];
  always_comb
    for (int b = 0; b <= N_BANKS; b++) bf_dest[b] = FW'(29'({bf[b].addr.pdbn, bf[b].addr.page}) % 29'(N_FC));

  logic     f_valid [N_FC], f_ready [N_FC], fr_valid [N_FC], fr_ready [N_FC];
  fc_req_t  f_req   [N_FC];
  fc_resp_t fr      [N_FC];
  logic [B1W-1:0] fr_dest [N_FC];

  zng_xbar #(.T(fc_req_t), .N_IN(N_BANKS + 1), .N_OUT(N_FC)) u_net_fc (
    .clk, .rst_n, .in_valid(bf_valid), .in_data(bf), .in_dest(bf_dest), .in_ready(bf_ready),
    .out_valid(f_valid), .out_data(f_req), .out_ready(f_ready));

  always_comb for (int f = 0; f < N_FC; f++) fr_dest[f] = B1W'(fr[f].dst);
  zng_xbar #(.T(fc_resp_t), .N_IN(N_FC), .N_OUT(N_BANKS + 1)) u_net_fcr (
    .clk, .rst_n, .in_valid(fr_valid), .in_data(fr), .in_dest(fr_dest), .in_ready(fr_ready),
    .out_valid(fb_valid), .out_data(fb), .out_ready(fb_ready));
  assign gc_resp_valid      = fb_valid[N_BANKS];
  assign gc_resp            = fb[N_BANKS];
  assign fb_ready[N_BANKS]  = gc_resp_ready;

  // ---------------- flash controllers, flash network, packages ----------------
  logic  inj_v [NN], inj_r [NN], ej_v [NN], ej_r [NN];
  flit_t inj_f [NN], ej_f [NN];

  flash_mesh #(.NX(MESH_X), .NY(NY)) u_mesh (
    .clk, .rst_n, .inj_valid(inj_v), .inj_flit(inj_f), .inj_ready(inj_r),
    .ej_valid(ej_v), .ej_flit(ej_f), .ej_ready(ej_r));

  for (genvar f = 0; f < N_FC; f++) begin : g_fc
    flash_ctrl #(.NODE_ID(f), .TC_WINDOW(TC_WINDOW)) u_fc (
      .clk, .rst_n, .req_valid(f_valid[f]), .req(f_req[f]), .req_ready(f_ready[f]),
      .resp_valid(fr_valid[f]), .resp(fr[f]), .resp_ready(fr_ready[f]),
      .tx_valid(inj_v[f]), .tx_flit(inj_f[f]), .tx_ready(inj_r[f]),
      .rx_valid(ej_v[f]), .rx_flit(ej_f[f]), .rx_ready(ej_r[f]),
      .thrash(thrash[f]), .st_thrash_episodes(st_thrash[f]), .st_requests());
  end
  for (genvar n = N_FC; n < PKG_NODE0; n++) begin : g_idle_fc
    assign inj_v[n] = 1'b0;
    assign inj_f[n] = '0;
    assign ej_r[n]  = 1'b1;
  end

  for (genvar p = 0; p < N_PKG; p++) begin : g_pkg
    znand_package #(.NODE_ID(PKG_NODE0 + p), .NPLANES(N_PLANES), .NPAGES(N_PAGES), .NBLOCKS(N_BLOCKS),
                    .LOG_BLOCKS(LOG_BLOCKS), .GC_MARGIN(GC_MARGIN), .TR_CYCLES(TR_CYCLES), .TPROG_CYCLES(TPROG_CYCLES),
                    .TBERS_CYCLES(TBERS_CYCLES)) u_pkg (
      .clk, .rst_n,
      .rx_valid(ej_v[PKG_NODE0 + p]), .rx_flit(ej_f[PKG_NODE0 + p]), .rx_ready(ej_r[PKG_NODE0 + p]),
      .tx_valid(inj_v[PKG_NODE0 + p]), .tx_flit(inj_f[PKG_NODE0 + p]), .tx_ready(inj_r[PKG_NODE0 + p]),
      .gc_alert(gc_alert[p]),
      .st_reads(st_pkg[p][0]), .st_reg_read_hits(st_pkg[p][1]), .st_writes(st_pkg[p][2]),
      .st_write_merges(st_pkg[p][3]), .st_evictions(st_pkg[p][4]), .st_migrations(st_pkg[p][5]),
      .st_programs(st_pkg[p][6]), .st_log_hits(st_pkg[p][7]), .st_refused(st_pkg[p][8]));
  end
  for (genvar n = PKG_NODE0 + N_PKG; n < NN; n++) begin : g_idle_pkg
    assign inj_v[n] = 1'b0;
    assign inj_f[n] = '0;
    assign ej_r[n]  = 1'b1;
  end
endmodule
