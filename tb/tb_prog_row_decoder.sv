// tb_prog_row_decoder: self-checking test of the programmable row decoder (LPMT CAM) with a
// small plane (16 blocks of 16 pages, the top 2 blocks are log blocks, alert margin 2).
// A reference model keeps, per log block, the list of keys programmed in order.  Random
// lookups, programs and erases are issued one per cycle; every result, which appears in the
// next cycle, is compared with the model: a lookup must select the newest matching row of
// the log block or fall back to {data block, page}; a program must take the next free row
// or be refused when the block is full or not a log block; gc_alert must follow the fill
// level.  Directed steps first fill a log block completely and check the refusal.
module tb_prog_row_decoder;
  import zng_pkg::*;
  localparam int LB = 2, NP = 16, NB = 16, GM = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic lk_valid, lk_done, lk_hit, pg_valid, pg_done, pg_ok, er_valid, gc_alert;
  logic [BLK_W-1:0] lk_plbn, lk_dblk, lk_blk, pg_plbn, pg_dblk, er_blk;
  logic [PG_W-1:0] lk_page, lk_row, pg_page, pg_row;
  prog_row_decoder #(.LOG_BLOCKS(LB), .NPAGES(NP), .NBLOCKS(NB), .GC_MARGIN(GM)) dut (.*);

  int keys[LB][$];
  int e_hit, e_blk, e_row, e_ok, e_prow;

  task automatic idle();
    lk_valid = 0; pg_valid = 0; er_valid = 0;
  endtask

  // op: 0 lookup, 1 program, 2 erase
  task automatic op(input int o, input int plbn, input int dblk, input int page);
    @(negedge clk); idle();
    if (o == 0) begin
      int sl = plbn - (NB - LB);
      lk_valid = 1; lk_plbn = BLK_W'(plbn); lk_dblk = BLK_W'(dblk); lk_page = PG_W'(page);
      e_hit = 0; e_blk = dblk; e_row = page;
      if (sl >= 0 && sl < LB)
        foreach (keys[sl][i]) if (keys[sl][i] == dblk * 1024 + page) begin e_hit = 1; e_blk = plbn; e_row = i; end
      @(negedge clk); idle();
      check(lk_done && lk_hit == e_hit && int'(lk_blk) == e_blk && int'(lk_row) == e_row,
            $sformatf("lookup %0d/%0d/%0d: hit %0d blk %0d row %0d", plbn, dblk, page, lk_hit, lk_blk, lk_row));
    end else if (o == 1) begin
      int sl = plbn - (NB - LB);
      pg_valid = 1; pg_plbn = BLK_W'(plbn); pg_dblk = BLK_W'(dblk); pg_page = PG_W'(page);
      e_ok = (sl >= 0 && sl < LB) ? (keys[sl].size() < NP) : 0;
      e_prow = e_ok ? keys[sl].size() : 0;
      if (e_ok) keys[sl].push_back(dblk * 1024 + page);
      @(negedge clk); idle();
      check(pg_done && pg_ok == e_ok && int'(pg_row) == e_prow,
            $sformatf("program %0d/%0d/%0d: ok %0d row %0d", plbn, dblk, page, pg_ok, pg_row));
    end else begin
      int sl = plbn - (NB - LB);
      er_valid = 1; er_blk = BLK_W'(plbn);
      if (sl >= 0 && sl < LB) keys[sl].delete();
      @(negedge clk); idle();
    end
    begin
      bit a = 0;
      for (int l = 0; l < LB; l++) if (keys[l].size() + GM >= NP) a = 1;
      check(gc_alert == a, "gc_alert level");
    end
  endtask

  int hits = 0;
  initial begin
    idle(); lk_plbn = '0; lk_dblk = '0; lk_page = '0; pg_plbn = '0; pg_dblk = '0; pg_page = '0; er_blk = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill log block 15 with page 3 of block 1 rewritten, then full refusal
    for (int i = 0; i < NP; i++) op(1, 15, 1, (i % 4 == 0) ? 3 : i);
    op(0, 15, 1, 3);
    check(lk_hit && lk_row == PG_W'(12), "newest copy selected");
    op(1, 15, 2, 2);
    check(!pg_ok, "full log block refuses");
    op(1, 5, 2, 2);
    check(!pg_ok, "non-log block refuses");
    op(2, 15, 0, 0);
    op(0, 15, 1, 3);
    check(!lk_hit && lk_blk == BLK_W'(1) && lk_row == PG_W'(3), "erased log block misses");
    for (int k = 0; k < 3000; k++) begin
      automatic int o = $urandom_range(0, 99);
      automatic int plbn = (NB - LB) + $urandom_range(0, LB - 1);
      if ($urandom_range(0, 9) == 0) plbn = $urandom_range(0, NB - 1);
      op(o < 55 ? 0 : (o < 98 ? 1 : 2), plbn, $urandom_range(0, 3), $urandom_range(0, 3));
      if (o < 55 && lk_hit) hits++;
    end
    check(hits > 100, $sformatf("lookups hit (%0d)", hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
