// l2_bank: one bank of ZnG's shared L2 cache: an STT-MRAM read cache with dynamic prefetch
// and a pinned space for writes that the flash registers cannot absorb.
//
// ZnG has no DRAM: the L2 cache is the read buffer in front of Z-NAND, built from STT-MRAM
// (4x the SRAM capacity, 1-cycle reads, 5-cycle writes).  Because STT-MRAM writes are slow
// the cache is read-only: a write normally goes straight to the flash controller (where the
// flash registers merge it) and any clean copy here is invalidated.  Only while the
// thrashing checker of the flash controllers raises `redirect` are writes kept here as dirty
// lines, at most PINNED_WAYS per set (the "pinned" space); a dirty line keeps its log block
// number and is written back to flash when it is displaced.
//
// Each tag entry is extended by a prefetch bit and an accessed (used) bit.  A read miss asks
// the PC-indexed predictor (l2_predictor) whether the PC shows page locality; if so the
// bank reads gran_lines lines from the flash page (from the missing line up to the page end)
// instead of one, with the size set by the access monitor (l2_access_monitor), which is
// fed by the prefetch/used bits of every evicted line.
//
// Organisation: SETS sets x WAYS ways of 128 B lines, true LRU.  The bank sees the global
// flash line address; line address L belongs to bank L mod NUM_BANKS, set (L / NUM_BANKS)
// mod SETS, and the full line address is kept as tag.  The default 4096 sets x 8 ways x
// 6 banks x 128 B gives the 24 MB STT-MRAM L2 of the paper (its SRAM baseline has 1024 sets).
// The bank is blocking: one request is handled at a time.
// Interface: valid/ready request/response to the SMs and to the flash controllers.
// Timing: a read hit raises resp_valid in the cycle after acceptance (1-cycle tag and data
// read); a pinned write answers WR_LAT (5) cycles after acceptance, the lookup cycle being
// the first write cycle; every filled line occupies the bank for WR_LAT cycles.
module l2_bank
  import zng_pkg::*;
#(
  parameter int unsigned SETS        = 4096,
  parameter int unsigned WAYS        = 8,
  parameter int unsigned NUM_BANKS   = 6,
  parameter int unsigned BANK_ID     = 0,
  parameter int unsigned PINNED_WAYS = 1,
  parameter int unsigned WR_LAT      = 5,
  parameter int unsigned PRED_ENTRIES = 512,
  parameter int unsigned MON_WINDOW  = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  input  l2_req_t   req,
  output logic      req_ready,
  output logic      resp_valid,
  output l2_resp_t  resp,
  input  logic      resp_ready,
  output logic      fc_valid,
  output fc_req_t   fc_req,
  input  logic      fc_ready,
  input  logic      fcr_valid,
  input  fc_resp_t  fcr,
  output logic      fcr_ready,
  input  logic      redirect,
  output logic [31:0] st_rd_hits,
  output logic [31:0] st_rd_miss,
  output logic [31:0] st_prefetch,
  output logic [31:0] st_redirect,
  output logic [31:0] st_writeback,
  output logic [31:0] st_evict,
  output logic [31:0] st_gran_shrink,
  output logic [31:0] st_gran_grow,
  output logic [5:0]  st_gran_lines
);
  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);
  localparam int unsigned LW = $bits(fline_t);

  typedef enum logic [3:0] {S_IDLE, S_LOOK, S_FCREQ, S_FILL, S_WACK, S_WB, S_WBACK, S_WLAT, S_RESP} state_e;
  state_e state;

  fline_t             tag_q   [SETS][WAYS];
  logic [WAYS-1:0]    val_q   [SETS];
  logic [WAYS-1:0]    dirty_q [SETS];
  logic [WAYS-1:0]    pref_q  [SETS];
  logic [WAYS-1:0]    used_q  [SETS];
  logic [WW-1:0]      age_q   [SETS][WAYS];
  logic [BLK_W-1:0]   plbn_q  [SETS][WAYS];   // log block of a dirty line, for its write-back
  line_t              data_q  [SETS*WAYS];

  l2_req_t            r;
  logic [SW-1:0]      rset;
  logic [5:0]         fill_left;
  logic [7:0]         wcnt;
  logic [WW-1:0]      wway;

  function automatic logic [SW-1:0] set_of(fline_t a);
    return SW'((LW'(a) / LW'(NUM_BANKS)) % LW'(SETS));
  endfunction

  // ---- lookup of the held request ----
  logic          hit, hit_dirty;
  logic [WW-1:0] hway;
  logic [WW-1:0] cvict;    // victim among clean or invalid ways (for fills / first dirty line)
  logic          cvict_ok;
  logic [WW-1:0] dvict;    // LRU dirty way
  int unsigned   ndirty;
  always_comb begin
    hit = 1'b0; hway = '0; hit_dirty = 1'b0;
    cvict = '0; cvict_ok = 1'b0; dvict = '0; ndirty = 0;
    for (int w = 0; w < WAYS; w++) begin
      if (val_q[rset][w] && tag_q[rset][w] == r.addr) begin
        hit = 1'b1; hway = WW'(w); hit_dirty = dirty_q[rset][w];
      end
      if (val_q[rset][w] && dirty_q[rset][w]) ndirty++;
    end
    for (int w = 0; w < WAYS; w++) begin
      if (!val_q[rset][w] && !(cvict_ok && !val_q[rset][cvict])) begin cvict = WW'(w); cvict_ok = 1'b1; end
      else if (val_q[rset][w] && !dirty_q[rset][w] &&
               (!cvict_ok || (val_q[rset][cvict] && age_q[rset][w] > age_q[rset][cvict]))) begin
        cvict = WW'(w); cvict_ok = 1'b1;
      end
      if (val_q[rset][w] && dirty_q[rset][w] &&
          (!(val_q[rset][dvict] && dirty_q[rset][dvict]) || age_q[rset][w] > age_q[rset][dvict]))
        dvict = WW'(w);
    end
  end

  // ---- predictor and access monitor ----
  logic        pf_hit;
  logic [3:0]  pf_cnt;
  logic        ev_valid, ev_pref, ev_used;
  logic [12:0] gran_bytes;
  logic [5:0]  gran_lines;
  logic [15:0] m_ev, m_un;
  logic        pred_upd;

  l2_predictor #(.ENTRIES(PRED_ENTRIES)) u_pred (
    .clk, .rst_n,
    .upd_valid(pred_upd), .upd_pc(r.pc), .upd_warp(r.warp),
    .upd_page(29'({r.addr.pdbn, r.addr.page})),
    .q_pc(r.pc), .q_prefetch(pf_hit), .q_count(pf_cnt));

  l2_access_monitor #(.WINDOW(MON_WINDOW)) u_mon (
    .clk, .rst_n, .evict_valid(ev_valid), .evict_pref(ev_pref), .evict_used(ev_used),
    .gran_bytes, .gran_lines, .evict_count(m_ev), .unused_count(m_un),
    .shrinks(st_gran_shrink), .grows(st_gran_grow));
  assign st_gran_lines = gran_lines;

  logic [5:0] nl_want, nl_room, nl;
  always_comb begin
    nl_want = pf_hit ? ((gran_lines == 0) ? 6'd1 : gran_lines) : 6'd1;
    nl_room = 6'(LINES_PER_PAGE) - 6'(r.addr.line);
    nl      = (nl_want > nl_room) ? nl_room : nl_want;
  end

  assign req_ready = (state == S_IDLE);
  assign pred_upd  = (state == S_LOOK) && !r.wr;
  assign fcr_ready = ((state == S_FILL) && wcnt == 0) || state == S_WACK || state == S_WBACK;

  // fill: the arriving line's set and victim
  fline_t        faddr;
  logic [SW-1:0] fset;
  logic          fpresent;
  logic [WW-1:0] fway;
  logic          fway_ok;
  always_comb begin
    faddr = fcr.addr;
    fset  = set_of(faddr);
    fpresent = 1'b0; fway = '0; fway_ok = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (val_q[fset][w] && tag_q[fset][w] == faddr) fpresent = 1'b1;
    for (int w = 0; w < WAYS; w++) begin
      if (!val_q[fset][w] && !(fway_ok && !val_q[fset][fway])) begin fway = WW'(w); fway_ok = 1'b1; end
      else if (val_q[fset][w] && !dirty_q[fset][w] &&
               (!fway_ok || (val_q[fset][fway] && age_q[fset][w] > age_q[fset][fway]))) begin
        fway = WW'(w); fway_ok = 1'b1;
      end
    end
  end

  task automatic touch(input logic [SW-1:0] s, input logic [WW-1:0] w);
    for (int k = 0; k < WAYS; k++)
      if (age_q[s][k] < age_q[s][w]) age_q[s][k] <= age_q[s][k] + WW'(1);
    age_q[s][w] <= '0;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r <= '0; rset <= '0; fill_left <= '0; wcnt <= '0;
      wway <= '0; resp_valid <= 1'b0; resp <= '0; fc_valid <= 1'b0; fc_req <= '0;
      ev_valid <= 1'b0; ev_pref <= 1'b0; ev_used <= 1'b0;
      st_rd_hits <= '0; st_rd_miss <= '0; st_prefetch <= '0; st_redirect <= '0; st_writeback <= '0; st_evict <= '0;
      for (int s = 0; s < SETS; s++) begin
        val_q[s] <= '0; dirty_q[s] <= '0; pref_q[s] <= '0; used_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin age_q[s][w] <= WW'(w); tag_q[s][w] <= '0; plbn_q[s][w] <= '0; end
      end
    end else begin
      ev_valid <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          r <= req; rset <= set_of(req.addr); state <= S_LOOK;
        end
        S_LOOK: begin
          resp.sm <= r.sm; resp.wr <= r.wr; resp.addr <= r.addr; resp.data <= '0;
          if (!r.wr) begin
            if (hit) begin
              resp.data <= data_q[int'(rset)*WAYS + int'(hway)];
              used_q[rset][hway] <= 1'b1;
              touch(rset, hway);
              st_rd_hits <= st_rd_hits + 1;
              resp_valid <= 1'b1; state <= S_RESP;
            end else begin
              st_rd_miss <= st_rd_miss + 1;
              if (nl > 1) st_prefetch <= st_prefetch + 1;
              fc_req <= '{cmd: FC_READ, src: 3'(BANK_ID), addr: r.addr, plbn: r.plbn, nlines: nl, wdata: '0};
              fc_valid <= 1'b1; fill_left <= nl; state <= S_FCREQ;
            end
          end else if (hit && hit_dirty) begin
            // newer data already pinned here: update in place
            data_q[int'(rset)*WAYS + int'(hway)] <= r.wdata;
            touch(rset, hway); wcnt <= 8'(WR_LAT); state <= S_WLAT;
            st_redirect <= st_redirect + 1;
          end else if (redirect) begin
            st_redirect <= st_redirect + 1;
            if (hit) begin
              wway <= hway;
              data_q[int'(rset)*WAYS + int'(hway)] <= r.wdata;
              dirty_q[rset][hway] <= 1'b1; plbn_q[rset][hway] <= r.plbn; touch(rset, hway);
              wcnt <= 8'(WR_LAT); state <= S_WLAT;
            end else if (ndirty < PINNED_WAYS && cvict_ok) begin
              if (val_q[rset][cvict]) begin
                ev_valid <= 1'b1; ev_pref <= pref_q[rset][cvict]; ev_used <= used_q[rset][cvict];
                st_evict <= st_evict + 1;
              end
              tag_q[rset][cvict] <= r.addr; val_q[rset][cvict] <= 1'b1; dirty_q[rset][cvict] <= 1'b1;
              plbn_q[rset][cvict] <= r.plbn;
              pref_q[rset][cvict] <= 1'b0; used_q[rset][cvict] <= 1'b1;
              data_q[int'(rset)*WAYS + int'(cvict)] <= r.wdata; touch(rset, cvict);
              wcnt <= 8'(WR_LAT); state <= S_WLAT;
            end else begin
              // pinned space of this set is full: write the LRU dirty line back, reuse its way
              wway <= dvict;
              fc_req <= '{cmd: FC_WRITE, src: 3'(BANK_ID), addr: tag_q[rset][dvict], plbn: plbn_q[rset][dvict], nlines: 6'd1,
                          wdata: data_q[int'(rset)*WAYS + int'(dvict)]};
              fc_valid <= 1'b1; state <= S_WB; st_writeback <= st_writeback + 1;
            end
          end else begin
            if (hit) val_q[rset][hway] <= 1'b0;   // read-only cache: drop the stale copy
            fc_req <= '{cmd: FC_WRITE, src: 3'(BANK_ID), addr: r.addr, plbn: r.plbn, nlines: 6'd1, wdata: r.wdata};
            fc_valid <= 1'b1; state <= S_FCREQ;
          end
        end
        S_FCREQ: if (fc_ready) begin
          fc_valid <= 1'b0; state <= r.wr ? S_WACK : S_FILL;
        end
        S_FILL: begin
          if (wcnt != 0) wcnt <= wcnt - 8'd1;
          else if (fcr_valid) begin
            if (fcr.addr == r.addr) resp.data <= fcr.data;
            if (!fpresent && fway_ok) begin
              if (val_q[fset][fway]) begin
                ev_valid <= 1'b1; ev_pref <= pref_q[fset][fway]; ev_used <= used_q[fset][fway];
                st_evict <= st_evict + 1;
              end
              tag_q[fset][fway] <= faddr; val_q[fset][fway] <= 1'b1; dirty_q[fset][fway] <= 1'b0;
              pref_q[fset][fway] <= (fcr.addr != r.addr); used_q[fset][fway] <= (fcr.addr == r.addr);
              data_q[int'(fset)*WAYS + int'(fway)] <= fcr.data; touch(fset, fway);
              wcnt <= 8'(WR_LAT - 1);
            end
            fill_left <= fill_left - 6'd1;
            if (fcr.last || fill_left == 6'd1) begin
              wcnt <= 8'(WR_LAT); state <= S_WLAT;   // last line's array write
            end
          end
        end
        S_WACK: if (fcr_valid) begin resp_valid <= 1'b1; state <= S_RESP; end
        S_WB: if (fc_ready) begin fc_valid <= 1'b0; state <= S_WBACK; end
        S_WBACK: if (fcr_valid) begin
          tag_q[rset][wway] <= r.addr; dirty_q[rset][wway] <= 1'b1; val_q[rset][wway] <= 1'b1;
          plbn_q[rset][wway] <= r.plbn;
          pref_q[rset][wway] <= 1'b0; used_q[rset][wway] <= 1'b1;
          data_q[int'(rset)*WAYS + int'(wway)] <= r.wdata; touch(rset, wway);
          wcnt <= 8'(WR_LAT); state <= S_WLAT;
        end
        S_WLAT: begin
          if (wcnt > 2) wcnt <= wcnt - 8'd1;   // the lookup cycle was the first write cycle
          else begin wcnt <= '0; resp_valid <= 1'b1; state <= S_RESP; end
        end
        S_RESP: if (resp_ready) begin resp_valid <= 1'b0; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
