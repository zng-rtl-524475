// tb_znand_plane_array: self-checking test of the Z-NAND plane array model with short
// latencies (read 5, program 20, erase 30 cycles) and 8 pages per block.
// It checks that an erased page reads as all ones, that a programmed page reads back, that
// busy lasts exactly the operation's latency and a read result arrives TR cycles after the
// command, that a command given while busy is ignored, and that erase clears a whole block
// and only that block.  A random phase programs erased pages and reads random pages
// against a reference copy.
module tb_znand_plane_array;
  import zng_pkg::*;
  localparam int TR = 5, TP = 20, TE = 30, NP = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic cmd_valid, busy, rd_valid;
  logic [1:0] cmd_op;
  logic [BLK_W-1:0] cmd_blk;
  logic [PG_W-1:0] cmd_page;
  page_t cmd_wdata, rd_data;
  znand_plane_array #(.TR_CYCLES(TR), .TPROG_CYCLES(TP), .TBERS_CYCLES(TE), .NPAGES(NP)) dut (.*);

  page_t ref_pg[int];
  function automatic page_t pat(int a);
    page_t p;
    for (int i = 0; i < PAGE_BITS / 32; i++) p[i*32 +: 32] = 32'(a * 7919 + i) ^ 32'hc0ffee00;
    return p;
  endfunction

  // returns the number of cycles busy stayed high
  task automatic cmd(input int o, input int blk, input int page, input page_t d, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(o); cmd_blk = BLK_W'(blk); cmd_page = PG_W'(page); cmd_wdata = d;
    @(negedge clk); cmd_valid = 0;
    cyc = 0;
    while (busy) begin
      cyc++;
      if (o == 0 && cyc == 2) begin
        // a second command while busy must be ignored
        cmd_valid = 1; cmd_op = 2'd2; cmd_blk = BLK_W'(blk);
      end else cmd_valid = 0;
      if (rd_valid) check(0, "early read data");
      @(negedge clk);
    end
    if (rd_valid) begin got = rd_data; got_rd++; end   // result pulse comes with busy falling
    cmd_valid = 0;
  endtask

  int cyc, got_rd;
  page_t got;

  task automatic rd(input int blk, input int page, input string m);
    int n = got_rd;
    cmd(0, blk, page, '0, cyc);
    check(cyc == TR && got_rd == n + 1, $sformatf("%s: read time %0d", m, cyc));
    check(got == (ref_pg.exists(blk * NP + page) ? ref_pg[blk * NP + page] : '1), {m, ": read data"});
  endtask

  initial begin
    cmd_valid = 0; cmd_op = 0; cmd_blk = 0; cmd_page = 0; cmd_wdata = '0; got_rd = 0; got = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    rd(3, 2, "erased page");
    check(got == '1, "erased page is all ones");
    cmd(1, 3, 2, pat(26), cyc); ref_pg[3 * NP + 2] = pat(26);
    check(cyc == TP, $sformatf("program time %0d", cyc));
    rd(3, 2, "programmed page");
    cmd(1, 4, 0, pat(32), cyc); ref_pg[4 * NP + 0] = pat(32);
    cmd(2, 3, 0, '0, cyc); ref_pg.delete(3 * NP + 2);
    check(cyc == TE, $sformatf("erase time %0d", cyc));
    rd(3, 2, "erased block");
    rd(4, 0, "other block kept");
    for (int k = 0; k < 400; k++) begin
      automatic int b = $urandom_range(0, 3), p = $urandom_range(0, NP - 1), o = $urandom_range(0, 9);
      if (o < 4 && !ref_pg.exists(b * NP + p)) begin
        automatic page_t d = pat($urandom);
        cmd(1, b, p, d, cyc); ref_pg[b * NP + p] = d;
      end else if (o == 9) begin
        cmd(2, b, 0, '0, cyc);
        for (int i = 0; i < NP; i++) ref_pg.delete(b * NP + i);
      end else rd(b, p, "random read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
