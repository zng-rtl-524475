// tb_znand_package: self-checking test of a Z-NAND package with NiF flash registers, scaled
// down so that registers fill and log blocks run out quickly: 4 planes with 3 registers each
// (one data register and two cache registers per plane, 8 cache registers in all), 16 blocks
// of 16 pages per plane with the top 2 blocks as log blocks, read 4, program 20, erase 30 and
// migration 8 cycles.  The network port is driven directly by the testbench.
// The reference model holds the newest value of every line.  Random 128 B writes go to
// 4 data blocks x 4 pages on each plane (data block b uses log block 14 + b % 2), random
// reads ask for 1 to 8 lines, and every RDATA packet is compared with the model.  A write
// refused because its log block is full (error bit in the acknowledgement) leaves the model
// unchanged.  Counters must show register read hits, write merges, evictions, migrations
// between planes, page programs, reads that hit a log page, refusals and gc_alert.
// Finally an erase of a block whose page sits in a register must drop the register and
// return all ones on the next read.
module tb_znand_package;
  import zng_pkg::*;
  localparam int NPL = 4, NPG = 16, NBL = 16, LB = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic rx_valid, rx_ready, tx_valid, tx_ready, gc_alert;
  flit_t rx_flit, tx_flit;
  logic [31:0] st_reads, st_reg_read_hits, st_writes, st_write_merges, st_evictions, st_migrations,
               st_programs, st_log_hits, st_refused;
  znand_package #(.NODE_ID(9), .NPLANES(NPL), .REGS(3), .NPAGES(NPG), .NBLOCKS(NBL), .LOG_BLOCKS(LB),
                  .TR_CYCLES(4), .TPROG_CYCLES(20), .TBERS_CYCLES(30), .MIG_CYCLES(8)) dut (.*);

  line_t model[int];
  function automatic int key(int p, int b, int g, int l);
    return ((p * NBL + b) * NPG + g) * 32 + l;
  endfunction
  function automatic line_t want(int k);
    return model.exists(k) ? model[k] : '1;
  endfunction

  task automatic put(input flit_t f);
    rx_valid = 1; rx_flit = f;
    while (!rx_ready) @(negedge clk);
    @(negedge clk); rx_valid = 0;
  endtask
  task automatic get(output flit_t f);
    tx_ready = ($urandom_range(0, 3) != 0);
    while (!(tx_valid && tx_ready)) begin @(negedge clk); tx_ready = ($urandom_range(0, 3) != 0); end
    f = tx_flit;
    @(negedge clk); tx_ready = 0;
  endtask

  function automatic nhdr_t mkh(ncmd_e c, int p, int b, int g, int l, int n);
    nhdr_t h;
    h = '0; h.dst = 5'd9; h.src = 5'd2; h.cmd = c; h.plbn = 10'(NBL - LB + b % 2);
    h.pdbn.ch = 4'd1; h.pdbn.die = '0; h.pdbn.plane = 3'(p); h.pdbn.blk = 10'(b);
    h.page = 9'(g); h.line = 5'(l); h.nlines = 6'(n);
    return h;
  endfunction

  int refused = 0;
  task automatic wr(int p, int b, int g, int l, line_t d);
    flit_t f; nhdr_t a;
    put('{head: 1'b1, tail: 1'b0, data: mkh(NC_WRITE, p, b, g, l, 1)});
    for (int i = 0; i < FLITS_PER_LINE; i++) put('{head: 1'b0, tail: (i == FLITS_PER_LINE - 1), data: d[i*64 +: 64]});
    get(f); a = nhdr_t'(f.data);
    check(f.head && f.tail && a.cmd == NC_WACK && a.dst == 5'd2 && a.src == 5'd9, "write acknowledgement");
    if (a.nlines[0]) refused++;
    else model[key(p, b, g, l)] = d;
  endtask
  task automatic rd(int p, int b, int g, int l, int n);
    flit_t f; nhdr_t a;
    put('{head: 1'b1, tail: 1'b1, data: mkh(NC_READ, p, b, g, l, n)});
    get(f); a = nhdr_t'(f.data);
    check(f.head && !f.tail && a.cmd == NC_RDATA && a.nlines == 6'(n), "read data header");
    for (int k = 0; k < n; k++) begin
      line_t got;
      for (int i = 0; i < FLITS_PER_LINE; i++) begin
        get(f); got[i*64 +: 64] = f.data;
        check(!f.head && f.tail == (k == n - 1 && i == FLITS_PER_LINE - 1), "data flit framing");
      end
      check(got == want(key(p, b, g, l + k)), $sformatf("read p%0d b%0d pg%0d line %0d", p, b, g, l + k));
    end
  endtask
  task automatic er(int p, int b);
    flit_t f; nhdr_t a;
    put('{head: 1'b1, tail: 1'b1, data: mkh(NC_ERASE, p, b, 0, 0, 1)});
    get(f); a = nhdr_t'(f.data);
    check(f.head && f.tail && a.cmd == NC_EACK && !a.nlines[0], "erase acknowledgement");
  endtask

  bit saw_alert = 0;
  always @(posedge clk) if (gc_alert) saw_alert = 1;

  initial begin
    rx_valid = 0; rx_flit = '0; tx_ready = 0;
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;
    // merges and register read hits
    wr(0, 0, 0, 3, {32{32'h11110003}});
    wr(0, 0, 0, 4, {32{32'h11110004}});
    rd(0, 0, 0, 3, 2);
    check(st_write_merges == 1 && st_reg_read_hits == 1, "merge and register read hit");
    rd(0, 0, 0, 2, 3);   // needs flash for line 2
    for (int k = 0; k < 900; k++) begin
      automatic int p = $urandom_range(0, NPL - 1), b = $urandom_range(0, 3), g = $urandom_range(0, 3);
      automatic int l = $urandom_range(0, 31);
      if ($urandom_range(0, 9) < 6) begin
        automatic line_t d;
        for (int i = 0; i < 32; i++) d[i*32 +: 32] = $urandom;
        wr(p, b, g, l, d);
      end else begin
        automatic int n = $urandom_range(1, 8);
        if (l + n > 32) l = 32 - n;
        rd(p, b, g, l, n);
      end
    end
    // erase drops a register of the erased block
    wr(1, 5, 2, 7, {32{32'h55550007}});
    rd(1, 5, 2, 7, 1);
    er(1, 5);
    for (int l = 0; l < 32; l++) model.delete(key(1, 5, 2, l));
    rd(1, 5, 2, 6, 2);
    check(refused == int'(st_refused), "refusals reported");
    check(st_evictions > 0 && st_migrations > 0 && st_programs > 0 && st_log_hits > 0 && st_refused > 0,
          "evictions, migrations, programs, log hits and refusals happened");
    check(saw_alert, "gc_alert raised");
    $display("reads %0d reghits %0d writes %0d merges %0d evict %0d mig %0d prog %0d loghit %0d refused %0d",
             st_reads, st_reg_read_hits, st_writes, st_write_merges, st_evictions, st_migrations, st_programs,
             st_log_hits, st_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
