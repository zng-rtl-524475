// tb_l2_bank: self-checking test of one L2 bank (read-only STT-MRAM cache with prefetch and
// pinned write space), with a small cache (16 sets) and a flash-controller model.
// The flash model keeps a backing store and answers reads line by line and writes with an
// acknowledgement.  The testbench keeps the newest value of every line it wrote.
// Handshakes are driven and sampled at the falling edge.
// Directed checks: a cold miss reads one line; a hit needs no flash access and answers 2
// cycles after acceptance (accept, 1-cycle array read) and a pinned write after 6 (accept,
// 5-cycle STT-MRAM write); after the predictor has seen the PC
// stream through a page, a miss reads the rest of the page (prefetch) and those lines then
// hit; a write without redirect goes to flash and drops the cached copy; with redirect a
// write stays in the cache and a second dirty line in the same set writes the first one back
// (with the log block number the first write carried).
// A random phase then checks that every read returns the newest data.
module tb_l2_bank;
  import zng_pkg::*;
  localparam int SETS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic req_valid, req_ready, resp_valid, resp_ready, fc_valid, fc_ready, fcr_valid, fcr_ready, redirect;
  l2_req_t req; l2_resp_t resp; fc_req_t fc_req; fc_resp_t fcr;
  logic [31:0] st_rd_hits, st_rd_miss, st_prefetch, st_redirect, st_writeback, st_evict, st_gran_shrink, st_gran_grow;
  logic [5:0] st_gran_lines;
  l2_bank #(.SETS(SETS), .NUM_BANKS(1), .BANK_ID(0), .MON_WINDOW(8)) dut (.*);

  line_t store[fline_t];     // flash contents
  line_t newest[fline_t];    // what a read must return
  function automatic line_t initval(fline_t a);
    return {32{32'(a) ^ 32'h5a5a1234}};
  endfunction
  function automatic line_t flash_val(fline_t a);
    return store.exists(a) ? store[a] : initval(a);
  endfunction
  function automatic line_t want(fline_t a);
    return newest.exists(a) ? newest[a] : initval(a);
  endfunction

  // flash controller model
  int fc_reads = 0, fc_writes = 0, last_nlines = 0, last_wplbn = 0;
  initial begin
    fc_ready = 0; fcr_valid = 0; fcr = '0;
    forever begin
      @(negedge clk);
      if (fc_valid) begin
        automatic fc_req_t q = fc_req;
        fc_ready = 1;
        @(negedge clk); fc_ready = 0;
        repeat ($urandom_range(1, 6)) @(negedge clk);
        if (q.cmd == FC_READ) begin
          fc_reads++; last_nlines = int'(q.nlines);
          for (int i = 0; i < int'(q.nlines); i++) begin
            automatic fline_t a = q.addr;
            a.line = q.addr.line + 5'(i);
            fcr = '{cmd: FC_READ, dst: 3'd0, addr: a, last: (i == int'(q.nlines) - 1), err: 1'b0, data: flash_val(a)};
            fcr_valid = 1;
            while (!fcr_ready) @(negedge clk);
            @(negedge clk); fcr_valid = 0;
          end
        end else begin
          fc_writes++; last_wplbn = int'(q.plbn);
          store[q.addr] = q.wdata;
          fcr = '{cmd: FC_WRITE, dst: 3'd0, addr: q.addr, last: 1'b1, err: 1'b0, data: '0};
          fcr_valid = 1;
          while (!fcr_ready) @(negedge clk);
          @(negedge clk); fcr_valid = 0;
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fline_t fa(int blk, int page, int line);
    fline_t a;
    a.pdbn = pdbn_t'(20'(blk)); a.page = 9'(page); a.line = 5'(line);
    return a;
  endfunction

  int lat;
  task automatic access(input fline_t a, input bit wr, input line_t d, input logic [31:0] pc, input int warp);
    int t0;
    @(negedge clk);
    req_valid = 1;
    req = '{pc: pc, warp: 7'(warp), sm: 4'd2, wr: wr, addr: a, plbn: 10'd1000, wdata: d};
    while (!req_ready) @(negedge clk);
    @(posedge clk); t0 = $time;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = ($time - t0 + 5) / 10;
    check(resp.sm == 4'd2 && resp.addr == a && resp.wr == wr, "response header");
    if (wr) newest[a] = d;
    else check(resp.data == want(a), $sformatf("read data of %h", a));
  endtask

  initial begin
    req_valid = 0; req = '0; resp_ready = 1; redirect = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // cold miss, then hit
    begin
      automatic int r0 = fc_reads;
      access(fa(5, 10, 3), 0, '0, 32'h40, 1);
      check(fc_reads == r0 + 1 && last_nlines == 1, "cold miss reads one line");
      access(fa(5, 10, 3), 0, '0, 32'h40, 1);
      check(fc_reads == r0 + 1, "hit needs no flash read");
      check(lat == 2, $sformatf("hit latency %0d", lat));
    end
    // train the predictor: PC 0x80, warp 0 streams through page 20; once the counter passes
    // the threshold, the next miss fetches the rest of the page and later lines hit
    begin
      automatic int r0 = fc_reads, at = -1;
      for (int i = 0; i < 32; i++) begin
        access(fa(7, 20, i), 0, '0, 32'h80, 0);
        if (at < 0 && st_prefetch == 1) begin
          at = i; r0 = fc_reads;
          check(last_nlines == 32 - i, $sformatf("prefetch of the page rest (%0d lines at line %0d)", last_nlines, i));
        end
      end
      check(at >= 12, $sformatf("prefetch only after training (line %0d)", at));
      check(fc_reads == r0, "prefetched lines hit");
    end
    // write without redirect: goes to flash, cached copy dropped
    begin
      automatic int w0 = fc_writes, r0 = fc_reads;
      access(fa(5, 10, 3), 1, {32{32'hdead0001}}, 32'h44, 2);
      check(fc_writes == w0 + 1 && store[fa(5, 10, 3)] == {32{32'hdead0001}}, "write reaches flash");
      access(fa(5, 10, 3), 0, '0, 32'h48, 2);
      check(fc_reads == r0 + 1, "stale copy was dropped");
    end
    // redirect: writes stay in L2; second dirty line of the same set writes the first back
    redirect = 1;
    begin
      automatic int w0 = fc_writes;
      automatic fline_t a1 = fa(9, 1, 0), a2 = a1;
      a2.line = a1.line + 5'(SETS);   // same set
      access(a1, 1, {32{32'hbeef0001}}, 32'h50, 3);
      check(fc_writes == w0, "redirected write stays in L2");
      check(lat == 6, $sformatf("STT-MRAM write latency (%0d)", lat));
      access(a1, 0, '0, 32'h54, 3);
      access(a2, 1, {32{32'hbeef0002}}, 32'h50, 3);
      check(fc_writes == w0 + 1 && store[a1] == {32{32'hbeef0001}}, "dirty line written back");
      check(st_writeback == 1 && last_wplbn == 1000, "writeback counted, with the line's log block");
      access(a2, 0, '0, 32'h54, 3);
    end
    // random phase
    for (int k = 0; k < 1500; k++) begin
      automatic fline_t a = fa($urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(0, 31));
      if (k % 100 == 0) redirect = $urandom_range(0, 1);
      if ($urandom_range(0, 9) < 3) access(a, 1, {32{$urandom}}, 32'h100 + 32'($urandom_range(0, 3) * 8), $urandom_range(0, 79));
      else access(a, 0, '0, 32'h100 + 32'($urandom_range(0, 3) * 8), 16 * $urandom_range(0, 4));
    end
    check(st_evict > 0, "evictions happened");
    $display("stats: hits %0d miss %0d pf %0d redir %0d wb %0d ev %0d shrink %0d grow %0d", st_rd_hits, st_rd_miss,
             st_prefetch, st_redirect, st_writeback, st_evict, st_gran_shrink, st_gran_grow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
