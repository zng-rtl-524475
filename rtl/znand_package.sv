// znand_package: one Z-NAND flash package with Network-in-Flash (NiF) flash registers.
//
// The package has DIES x PLANES_PER_DIE planes.  Each plane has REGS_PER_PLANE flash
// registers (page buffers), a programmable row decoder (prog_row_decoder, holding the log
// page mapping of the plane's log blocks) and its cell array (znand_plane_array).  ZnG turns
// the registers of all planes of a package into one fully-associative write cache: a 128 B
// write may land in any register of the package, and later writes to the same page merge
// into it, so that many small GPU writes cost one page program.  In NiF, one register of
// every plane is that plane's data register: it is the plane's read buffer and the only
// register that talks to other planes over the local network.  The other REGS_PER_PLANE-1
// registers are the cache.  When the cache is full the least recently used register is
// evicted: lines it does not hold are first read from flash (read-modify-write of the page),
// a register that sits in another plane's group migrates its page to the home plane's data
// register over the local network (PAGE_BYTES / 8 cycles at 8 B per cycle), and the page is
// programmed into the next free page of the data block's log block, whose row decoder
// records the mapping.  Programs run in the background in their plane, so evictions to
// different planes overlap (parallel eviction); a command to a busy plane waits for it.
//
// Commands arrive as flash-network packets (zng_pkg::nhdr_t header + data flits):
//  * NC_READ  {pdbn, page, line, nlines, plbn}: answered by NC_RDATA with nlines x 16 flits.
//    Lines held by a register are served from it; otherwise the row decoder picks the newest
//    copy (log page or data page), the page is read into the data register (tR) and the
//    register-held lines are overlaid.
//  * NC_WRITE {pdbn, page, line, plbn} + 16 flits: answered by NC_WACK; flag = a register was
//    evicted, nlines = 1 when the write was refused because the log block is full.
//  * NC_ERASE {pdbn}: erases a block (log or data) and drops registers of that block;
//    answered by NC_EACK.
// gc_alert is the OR of the planes' alerts: some log block has GC_MARGIN or fewer free pages.
// The package handles one command at a time and has one network port; the paper gives two
// I/O ports per package, which this design does not model separately.
module znand_package
  import zng_pkg::*;
#(
  parameter int unsigned NODE_ID        = PKG_NODE0,
  parameter int unsigned NPLANES        = PLANES,
  parameter int unsigned REGS           = REGS_PER_PLANE,
  parameter int unsigned NPAGES         = PAGES,
  parameter int unsigned NBLOCKS        = BLOCKS,
  parameter int unsigned LOG_BLOCKS     = 8,
  parameter int unsigned GC_MARGIN      = 8,
  parameter int unsigned TR_CYCLES      = 3600,
  parameter int unsigned TPROG_CYCLES   = 120000,
  parameter int unsigned TBERS_CYCLES   = 1200000,
  parameter int unsigned MIG_CYCLES     = PAGE_BYTES / 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_valid,
  input  flit_t       rx_flit,
  output logic        rx_ready,
  output logic        tx_valid,
  output flit_t       tx_flit,
  input  logic        tx_ready,
  output logic        gc_alert,
  output logic [31:0] st_reads,
  output logic [31:0] st_reg_read_hits,
  output logic [31:0] st_writes,
  output logic [31:0] st_write_merges,
  output logic [31:0] st_evictions,
  output logic [31:0] st_migrations,
  output logic [31:0] st_programs,
  output logic [31:0] st_log_hits,
  output logic [31:0] st_refused
);
  localparam int unsigned CREGS = NPLANES * (REGS - 1);   // cache registers
  localparam int unsigned CW    = $clog2(CREGS);
  localparam int unsigned PW    = (NPLANES > 1) ? $clog2(NPLANES) : 1;

  typedef enum logic [4:0] {
    P_RXH, P_RXD, P_EXEC, P_F_WAIT, P_F_LK, P_F_ARR, P_SEND_H, P_SEND_D, P_ACK,
    P_EV_MIG, P_EV_PWAIT, P_EV_PG, P_INSTALL, P_E_WAIT
  } state_e;
  state_e state, ret;

  // ---- register file ----
  logic                    rv     [CREGS];
  logic [PW-1:0]           rplane [CREGS];
  logic [BLK_W-1:0]        rblk   [CREGS];
  logic [PG_W-1:0]         rpage  [CREGS];
  logic [BLK_W-1:0]        rplbn  [CREGS];
  logic [LINES_PER_PAGE-1:0] rmask [CREGS];
  logic [31:0]             rstamp [CREGS];
  page_t                   rdata  [CREGS];
  page_t                   dreg   [NPLANES];    // data registers

  nhdr_t        hdr;
  line_t        wline;
  logic [3:0]   fcnt;
  logic [31:0]  now;
  logic [PW-1:0] hp;         // home plane of the current command
  page_t        obuf;
  logic [5:0]   sent_lines;
  logic [3:0]   sent_flits;
  logic         ack_flag, ack_err;
  logic [CW-1:0] vreg;       // register being evicted / installed
  logic [15:0]  mcnt;
  logic [PW-1:0] fp;         // plane of the page being fetched
  logic [BLK_W-1:0] f_plbn, f_blk;
  logic [PG_W-1:0]  f_page;

  // ---- plane instances ----
  logic             lk_v [NPLANES], pg_v [NPLANES], er_v [NPLANES], ac_v [NPLANES];
  logic             lk_done [NPLANES], lk_hit [NPLANES], pg_done [NPLANES], pg_ok [NPLANES];
  logic [BLK_W-1:0] lk_blk [NPLANES];
  logic [PG_W-1:0]  lk_row [NPLANES], pg_row [NPLANES];
  logic             gca [NPLANES], pbusy [NPLANES], prd_v [NPLANES];
  page_t            prd [NPLANES];
  logic [BLK_W-1:0] lk_plbn_b, lk_dblk_b, pg_plbn_b, pg_dblk_b, er_blk_b, ac_blk_b;
  logic [PG_W-1:0]  lk_page_b, pg_page_b, ac_page_b;
  logic [1:0]       ac_op_b;
  page_t            ac_wdata_b;

  for (genvar p = 0; p < NPLANES; p++) begin : g_plane
    prog_row_decoder #(.LOG_BLOCKS(LOG_BLOCKS), .NPAGES(NPAGES), .NBLOCKS(NBLOCKS), .GC_MARGIN(GC_MARGIN)) u_dec (
      .clk, .rst_n,
      .lk_valid(lk_v[p]), .lk_plbn(lk_plbn_b), .lk_dblk(lk_dblk_b), .lk_page(lk_page_b),
      .lk_done(lk_done[p]), .lk_hit(lk_hit[p]), .lk_blk(lk_blk[p]), .lk_row(lk_row[p]),
      .pg_valid(pg_v[p]), .pg_plbn(pg_plbn_b), .pg_dblk(pg_dblk_b), .pg_page(pg_page_b),
      .pg_done(pg_done[p]), .pg_ok(pg_ok[p]), .pg_row(pg_row[p]),
      .er_valid(er_v[p]), .er_blk(er_blk_b), .gc_alert(gca[p]));
    znand_plane_array #(.TR_CYCLES(TR_CYCLES), .TPROG_CYCLES(TPROG_CYCLES),
                        .TBERS_CYCLES(TBERS_CYCLES), .NPAGES(NPAGES)) u_arr (
      .clk, .rst_n, .cmd_valid(ac_v[p]), .cmd_op(ac_op_b), .cmd_blk(ac_blk_b), .cmd_page(ac_page_b),
      .cmd_wdata(ac_wdata_b), .busy(pbusy[p]), .rd_valid(prd_v[p]), .rd_data(prd[p]));
  end

  always_comb begin
    gc_alert = 1'b0;
    for (int p = 0; p < NPLANES; p++) gc_alert |= gca[p];
  end

  // ---- lookups over the register file ----
  logic          whit;  logic [CW-1:0] wreg;     // register holding the command's page
  logic          fl_ok; logic [CW-1:0] freg;     // free register (home group preferred)
  logic [CW-1:0] lru;                            // least recently used register
  always_comb begin
    whit = 1'b0; wreg = '0; fl_ok = 1'b0; freg = '0; lru = '0;
    for (int r = 0; r < CREGS; r++) begin
      if (rv[r] && rplane[r] == hp && rblk[r] == hdr.pdbn.blk && rpage[r] == hdr.page) begin
        whit = 1'b1; wreg = CW'(r);
      end
      if (!rv[r] && (!fl_ok || (r / (REGS - 1) == int'(hp) && int'(freg) / (REGS - 1) != int'(hp)))) begin
        fl_ok = 1'b1; freg = CW'(r);
      end
      if (rstamp[r] < rstamp[lru]) lru = CW'(r);
    end
  end

  // ---- one-hot plane controls, shared buses ----
  always_comb begin
    for (int p = 0; p < NPLANES; p++) begin
      lk_v[p] = (state == P_F_WAIT) && !pbusy[p] && (int'(fp) == p);
      ac_v[p] = ((state == P_F_LK) && lk_done[p] && (int'(fp) == p)) ||
                ((state == P_EV_PG) && pg_done[p] && pg_ok[p] && (int'(rplane[vreg]) == p)) ||
                ((state == P_E_WAIT) && !pbusy[p] && (int'(hp) == p));
      pg_v[p] = (state == P_EV_PWAIT) && !pbusy[p] && (int'(rplane[vreg]) == p);
      er_v[p] = (state == P_E_WAIT) && !pbusy[p] && (int'(hp) == p);
    end
    lk_plbn_b = f_plbn; lk_dblk_b = f_blk; lk_page_b = f_page;
    pg_plbn_b = rplbn[vreg]; pg_dblk_b = rblk[vreg]; pg_page_b = rpage[vreg];
    er_blk_b  = hdr.pdbn.blk;
    ac_op_b = 2'd0; ac_blk_b = lk_blk[fp]; ac_page_b = lk_row[fp]; ac_wdata_b = (int'(vreg) / (REGS - 1) == int'(rplane[vreg])) ? rdata[vreg] : dreg[rplane[vreg]];
    if (state == P_EV_PG) begin
      ac_op_b = 2'd1; ac_blk_b = rplbn[vreg]; ac_page_b = pg_row[rplane[vreg]];
    end else if (state == P_E_WAIT) begin
      ac_op_b = 2'd2; ac_blk_b = hdr.pdbn.blk; ac_page_b = '0;
    end
  end

  assign rx_ready = (state == P_RXH) || (state == P_RXD);

  nhdr_t rx_hdr;
  logic [LINES_PER_PAGE-1:0] need;    // lines asked for by a read
  always_comb begin
    rx_hdr = nhdr_t'(rx_flit.data);
    need   = LINES_PER_PAGE'((64'd1 << hdr.nlines) - 64'd1) << hdr.line;
  end

  function automatic flit_t mk_hdr(ncmd_e c, logic [5:0] nl, logic fl);
    nhdr_t h;
    h = hdr;
    h.dst = hdr.src; h.src = NODE_W'(NODE_ID); h.cmd = c; h.nlines = nl; h.flag = fl;
    return '{head: 1'b1, tail: (c != NC_RDATA), data: h};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_RXH; ret <= P_RXH; hdr <= '0; wline <= '0; fcnt <= '0; now <= 32'd1; hp <= '0;
      obuf <= '0; sent_lines <= '0; sent_flits <= '0; ack_flag <= 1'b0; ack_err <= 1'b0; vreg <= '0;
      mcnt <= '0; fp <= '0; f_plbn <= '0; f_blk <= '0; f_page <= '0;
      tx_valid <= 1'b0; tx_flit <= '0;
      st_reads <= '0; st_reg_read_hits <= '0; st_writes <= '0; st_write_merges <= '0; st_evictions <= '0;
      st_migrations <= '0; st_programs <= '0; st_log_hits <= '0; st_refused <= '0;
      for (int r = 0; r < CREGS; r++) begin
        rv[r] <= 1'b0; rplane[r] <= PW'(r / (REGS - 1)); rblk[r] <= '0; rpage[r] <= '0; rplbn[r] <= '0;
        rmask[r] <= '0; rstamp[r] <= '0;
      end
    end else begin
      now <= now + 1;
      case (state)
        P_RXH: if (rx_valid) begin
          hdr <= rx_hdr;
          hp  <= PW'({rx_hdr.pdbn.die, rx_hdr.pdbn.plane});
          fcnt <= '0;
          state <= (rx_hdr.cmd == NC_WRITE) ? P_RXD : P_EXEC;
        end
        P_RXD: if (rx_valid) begin
          wline[int'(fcnt)*FLIT_BITS +: FLIT_BITS] <= rx_flit.data;
          fcnt <= fcnt + 4'd1;
          if (rx_flit.tail) state <= P_EXEC;
        end
        P_EXEC: begin
          ack_flag <= 1'b0; ack_err <= 1'b0;
          case (hdr.cmd)
            NC_READ: begin
              st_reads <= st_reads + 1;
              if (whit && ((rmask[wreg] & need) == need)) begin
                obuf <= rdata[wreg]; rstamp[wreg] <= now; st_reg_read_hits <= st_reg_read_hits + 1;
                sent_lines <= '0; sent_flits <= '0; state <= P_SEND_H;
              end else begin
                fp <= hp; f_plbn <= hdr.plbn; f_blk <= hdr.pdbn.blk; f_page <= hdr.page;
                ret <= P_SEND_H; state <= P_F_WAIT;
              end
            end
            NC_WRITE: begin
              st_writes <= st_writes + 1;
              if (whit) begin
                rdata[wreg][int'(hdr.line)*LINE_BITS +: LINE_BITS] <= wline;
                rmask[wreg][hdr.line] <= 1'b1; rplbn[wreg] <= hdr.plbn; rstamp[wreg] <= now;
                st_write_merges <= st_write_merges + 1;
                state <= P_ACK;
              end else if (fl_ok) begin
                vreg <= freg; state <= P_INSTALL;
              end else begin
                // evict the LRU register; first complete its page if it holds only some lines
                vreg <= lru; st_evictions <= st_evictions + 1; ack_flag <= 1'b1;
                if (&rmask[lru]) begin
                  state <= P_EV_MIG; mcnt <= '0;
                end else begin
                  fp <= rplane[lru]; f_plbn <= rplbn[lru]; f_blk <= rblk[lru]; f_page <= rpage[lru];
                  ret <= P_EV_MIG; mcnt <= '0; state <= P_F_WAIT;
                end
              end
            end
            NC_ERASE: state <= P_E_WAIT;
            default:  state <= P_RXH;
          endcase
        end
        // ---- fetch a page into the data register of plane fp ----
        P_F_WAIT: if (!pbusy[fp]) state <= P_F_LK;
        P_F_LK: if (lk_done[fp]) begin
          if (lk_hit[fp]) st_log_hits <= st_log_hits + 1;
          state <= P_F_ARR;
        end
        P_F_ARR: if (prd_v[fp]) begin
          dreg[fp] <= prd[fp];
          if (ret == P_SEND_H) begin
            // overlay lines that a register holds
            automatic page_t m = prd[fp];
            if (whit)
              for (int l = 0; l < LINES_PER_PAGE; l++)
                if (rmask[wreg][l]) m[l*LINE_BITS +: LINE_BITS] = rdata[wreg][l*LINE_BITS +: LINE_BITS];
            obuf <= m; sent_lines <= '0; sent_flits <= '0;
          end else begin
            for (int l = 0; l < LINES_PER_PAGE; l++)
              if (!rmask[vreg][l]) rdata[vreg][l*LINE_BITS +: LINE_BITS] <= prd[fp][l*LINE_BITS +: LINE_BITS];
            rmask[vreg] <= '1;
          end
          state <= ret;
        end
        // ---- eviction ----
        P_EV_MIG: begin
          if (int'(vreg) / (REGS - 1) == int'(rplane[vreg])) begin
            state <= P_EV_PWAIT;
          end else if (int'(mcnt) + 1 >= MIG_CYCLES) begin
            dreg[rplane[vreg]] <= rdata[vreg];       // arrived in the home data register
            st_migrations <= st_migrations + 1;
            state <= P_EV_PWAIT;
          end else begin
            mcnt <= mcnt + 16'd1;
          end
        end
        P_EV_PWAIT: if (!pbusy[rplane[vreg]]) state <= P_EV_PG;
        P_EV_PG: if (pg_done[rplane[vreg]]) begin
          if (pg_ok[rplane[vreg]]) begin
            st_programs <= st_programs + 1;
            rv[vreg] <= 1'b0;
            state <= P_INSTALL;
          end else begin
            ack_err <= 1'b1; st_refused <= st_refused + 1; state <= P_ACK;
          end
        end
        P_INSTALL: begin
          rv[vreg] <= 1'b1; rplane[vreg] <= hp; rblk[vreg] <= hdr.pdbn.blk; rpage[vreg] <= hdr.page;
          rplbn[vreg] <= hdr.plbn; rstamp[vreg] <= now;
          rmask[vreg] <= LINES_PER_PAGE'(1) << hdr.line;
          rdata[vreg][int'(hdr.line)*LINE_BITS +: LINE_BITS] <= wline;
          state <= P_ACK;
        end
        // ---- erase ----
        P_E_WAIT: if (!pbusy[hp]) begin
          for (int r = 0; r < CREGS; r++)
            if (rv[r] && rplane[r] == hp && rblk[r] == hdr.pdbn.blk) rv[r] <= 1'b0;
          state <= P_ACK;
        end
        // ---- answers ----
        P_ACK: begin
          if (!tx_valid) begin
            tx_valid <= 1'b1;
            tx_flit  <= mk_hdr((hdr.cmd == NC_ERASE) ? NC_EACK : NC_WACK, {5'd0, ack_err}, ack_flag);
          end else if (tx_ready) begin
            tx_valid <= 1'b0; state <= P_RXH;
          end
        end
        P_SEND_H: begin
          if (!tx_valid) begin
            tx_valid <= 1'b1; tx_flit <= mk_hdr(NC_RDATA, hdr.nlines, 1'b0);
          end else if (tx_ready) begin
            tx_valid <= 1'b1;
            tx_flit  <= '{head: 1'b0, tail: (hdr.nlines == 6'd1 && FLITS_PER_LINE == 1),
                          data: obuf[int'(hdr.line)*LINE_BITS +: FLIT_BITS]};
            sent_lines <= '0; sent_flits <= 4'd1; state <= P_SEND_D;
          end
        end
        P_SEND_D: if (tx_ready) begin
          if (tx_flit.tail) begin
            tx_valid <= 1'b0; state <= P_RXH;
          end else begin
            automatic int fl = int'(sent_flits);
            automatic int ln = int'(sent_lines);
            automatic logic last;
            last = (ln + 1 == int'(hdr.nlines)) && (fl == FLITS_PER_LINE - 1);
            tx_flit <= '{head: 1'b0, tail: last,
                         data: obuf[(int'(hdr.line) + ln) * LINE_BITS + fl * FLIT_BITS +: FLIT_BITS]};
            if (fl == FLITS_PER_LINE - 1) begin sent_flits <= '0; sent_lines <= sent_lines + 6'd1; end
            else sent_flits <= sent_flits + 4'd1;
          end
        end
        default: state <= P_RXH;
      endcase
    end
  end
endmodule
