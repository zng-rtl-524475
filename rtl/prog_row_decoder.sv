// prog_row_decoder: the programmable row decoder of one Z-NAND plane, holding the log page
// mapping tables (LPMT) of the plane's log blocks.
//
// ZnG keeps the write side of the flash translation layer inside the flash: every log block
// has one decoder row per wordline, and a row stores the key of the page that was programmed
// into that wordline.  The key is {data block, page index}, because several data blocks share
// one log block.  The decoder works as a content-addressable memory:
//  * lookup (read): all rows of the request's log block are compared with the key; on a
//    match the wordline of the newest matching row is selected (pages of a block are
//    programmed in order, so the highest matching row is the newest copy), otherwise the
//    ordinary decoder selects {data block, page}.
//  * program (write): the row of the next free page of the log block, tracked by a
//    register, stores the key and becomes the new page; a full log block refuses.
//  * erase: erasing a log block clears its rows and its free-page register.
// The CAM is analog in the paper (flash cells on bitline pairs A/A', B/B', discharged
// wordlines); here it is the equivalent digital table.  Which blocks are log blocks is this
// design's choice: the top LOG_BLOCKS blocks of the plane (over-provisioned space, outside
// the address space of data blocks).  gc_alert rises when any log block has no more than
// GC_MARGIN free pages, so that the GC helper thread can reclaim it in time.
// Timing: lookup and program answer in the cycle after their valid pulse; one operation
// per cycle, lookup has priority, then program, then erase.
module prog_row_decoder
  import zng_pkg::*;
#(
  parameter int unsigned LOG_BLOCKS = 8,
  parameter int unsigned NPAGES     = PAGES,
  parameter int unsigned NBLOCKS    = BLOCKS,
  parameter int unsigned GC_MARGIN  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [BLK_W-1:0] lk_plbn,
  input  logic [BLK_W-1:0] lk_dblk,
  input  logic [PG_W-1:0]  lk_page,
  output logic             lk_done,
  output logic             lk_hit,
  output logic [BLK_W-1:0] lk_blk,
  output logic [PG_W-1:0]  lk_row,
  input  logic             pg_valid,
  input  logic [BLK_W-1:0] pg_plbn,
  input  logic [BLK_W-1:0] pg_dblk,
  input  logic [PG_W-1:0]  pg_page,
  output logic             pg_done,
  output logic             pg_ok,
  output logic [PG_W-1:0]  pg_row,
  input  logic             er_valid,
  input  logic [BLK_W-1:0] er_blk,
  output logic             gc_alert
);
  localparam int unsigned FIRST_LOG = NBLOCKS - LOG_BLOCKS;
  localparam int unsigned KW = BLK_W + PG_W;

  logic [KW-1:0]   key_q  [LOG_BLOCKS][NPAGES];
  logic [PG_W:0]   next_q [LOG_BLOCKS];

  function automatic int slot_of(logic [BLK_W-1:0] b);
    return (int'(b) >= FIRST_LOG) ? int'(b) - FIRST_LOG : -1;
  endfunction

  always_comb begin
    gc_alert = 1'b0;
    for (int l = 0; l < LOG_BLOCKS; l++)
      if (int'(next_q[l]) + GC_MARGIN >= NPAGES) gc_alert = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_done <= 1'b0; lk_hit <= 1'b0; lk_blk <= '0; lk_row <= '0;
      pg_done <= 1'b0; pg_ok <= 1'b0; pg_row <= '0;
      for (int l = 0; l < LOG_BLOCKS; l++) begin
        next_q[l] <= '0;
        for (int p = 0; p < NPAGES; p++) key_q[l][p] <= '0;
      end
    end else begin
      lk_done <= 1'b0;
      pg_done <= 1'b0;
      if (lk_valid) begin
        automatic int  sl = slot_of(lk_plbn);
        automatic logic h = 1'b0;
        automatic logic [PG_W-1:0] row = '0;
        if (sl >= 0)
          for (int p = 0; p < NPAGES; p++)
            if (p < int'(next_q[sl]) && key_q[sl][p] == {lk_dblk, lk_page}) begin
              h = 1'b1; row = PG_W'(p);
            end
        lk_done <= 1'b1;
        lk_hit  <= h;
        lk_blk  <= h ? lk_plbn : lk_dblk;
        lk_row  <= h ? row : lk_page;
      end else if (pg_valid) begin
        automatic int sl = slot_of(pg_plbn);
        pg_done <= 1'b1;
        if (sl >= 0 && int'(next_q[sl]) < NPAGES) begin
          key_q[sl][next_q[sl][PG_W-1:0]] <= {pg_dblk, pg_page};
          next_q[sl] <= next_q[sl] + 1'b1;
          pg_ok  <= 1'b1;
          pg_row <= next_q[sl][PG_W-1:0];
        end else begin
          pg_ok  <= 1'b0;
          pg_row <= '0;
        end
      end else if (er_valid) begin
        automatic int sl = slot_of(er_blk);
        if (sl >= 0) next_q[sl] <= '0;
      end
    end
  end
endmodule
