// tb_zng_top: end-to-end self-checking test of the ZnG memory system at reduced size:
// 4 SMs, 2 L2 banks of 8 sets x 8 ways, 2 flash controllers, 2 Z-NAND packages of 4 planes
// (16 blocks of 32 pages, 2 log blocks per plane, GC alert once a log block has 4 pages), 4-entry TLBs, a 64-entry DBMT, read 4,
// program 20 and erase 30 cycles, 8-eviction monitor window and 8-write thrashing window.
// The testbench plays the SMs and the GC helper thread.  It fills the DBMT through the
// update port (16 virtual blocks spread over both packages and all planes), then runs:
//   1. a load from an unmapped block (page fault);
//   2. one warp streaming through a page with one PC (trains the predictor, prefetch);
//   3. the same PC touching 4 lines of many pages (unused prefetches, granularity shrink);
//   4. stores merging in a flash register and loads served from registers;
//   5. stores to many distinct pages (register eviction, migration, program, thrashing,
//      writes redirected to pinned L2 space, write-back of pinned lines);
//   6. four SMs issuing random loads and stores in parallel, each to its own blocks;
//   7. a remap of one block through the DBMT port (TLB shootdown, reads of the new block);
//   8. GC-port read and erase commands.
// Every load is compared with a reference model holding the newest value of each virtual
// line (never-written flash reads as all ones).  At the end every mechanism is counted from
// the design's activity counters and a mechanism that never happened is a failure.
module tb_zng_top;
  import zng_pkg::*;
  localparam int NSM = 4, NB = 2, NF = 2, NP = 2, NPL = 4, NBLK = 16, NPG = 16, LOGB = 2, NVBN = 16;
  localparam int FPG = 32;   // flash pages per block (the test uses pages 0 .. NPG-1)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic        sm_req_valid [NSM], sm_req_ready [NSM], sm_resp_valid [NSM], sm_resp_ready [NSM], sm_fault [NSM];
  sm_req_t     sm_req [NSM];
  l2_resp_t    sm_resp [NSM];
  logic        dbmt_upd_valid, gc_req_valid, gc_req_ready, gc_resp_valid, gc_resp_ready, redirect;
  logic [VBN_W-1:0] dbmt_upd_vbn;
  dbmt_entry_t dbmt_upd_entry;
  fc_req_t     gc_req;
  fc_resp_t    gc_resp;
  logic        gc_alert [NP];
  logic [31:0] st_tlb_miss [NSM];
  logic [31:0] st_l2 [NB][9];
  logic [31:0] st_pkg [NP][9];
  logic [31:0] st_thrash [NF];

  zng_top #(.N_SM(NSM), .N_BANKS(NB), .N_FC(NF), .N_PKG(NP), .L2_SETS(8), .TLB_ENTRIES(4), .DBMT_ENTRIES(64),
            .N_PLANES(NPL), .N_BLOCKS(NBLK), .N_PAGES(FPG), .LOG_BLOCKS(LOGB), .GC_MARGIN(FPG - 4), .TR_CYCLES(4),
            .TPROG_CYCLES(20), .TBERS_CYCLES(30), .MON_WINDOW(8), .TC_WINDOW(8)) dut (.*);

  // ---- mapping of virtual blocks ----
  function automatic pdbn_t map(int v, int gen);
    pdbn_t p;
    p.ch = 4'(v % NP); p.die = '0; p.plane = 3'((v / NP) % NPL); p.blk = 10'(v / (NP * NPL) + 2 * gen);
    return p;
  endfunction
  function automatic dbmt_entry_t ent(int v, int gen);
    return '{valid: 1'b1, lbn: 20'(v), pdbn: map(v, gen), plbn: 10'(NBLK - LOGB + (v / (NP * NPL)) % LOGB)};
  endfunction

  line_t model[int];
  function automatic int key(int v, int g, int l);
    return (v * NPG + g) * 32 + l;
  endfunction
  function automatic line_t want(int k);
    return model.exists(k) ? model[k] : '1;
  endfunction
  function automatic line_t rnd_line();
    line_t d;
    for (int i = 0; i < 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  // ---- SM port driver (one outstanding request per SM) ----
  int faults = 0, loads = 0, stores = 0;
  task automatic sm_access(input int s, input int v, input int g, input int l, input bit wr, input line_t d,
                           input logic [31:0] pc, input int warp, input bit expect_fault = 0);
    sm_req_t q;
    q.pc = pc; q.warp = 7'(warp); q.wr = wr; q.addr.vbn = 14'(v); q.addr.page = 9'(g); q.addr.line = 5'(l);
    q.wdata = d;
    @(negedge clk);
    sm_req_valid[s] = 1; sm_req[s] = q;
    while (!sm_req_ready[s]) @(negedge clk);
    @(negedge clk); sm_req_valid[s] = 0;
    if (expect_fault) begin
      automatic bit f = 0;
      repeat (50) begin if (sm_fault[s]) f = 1; @(negedge clk); end
      check(f && !sm_resp_valid[s], "page fault on an unmapped block");
      if (f) faults++;
      return;
    end
    sm_resp_ready[s] = 1;
    while (!sm_resp_valid[s]) @(negedge clk);
    check(sm_resp[s].wr == wr && sm_resp[s].sm == 4'(s), "response routing");
    if (wr) begin model[key(v, g, l)] = d; stores++; end
    else begin
      check(sm_resp[s].data == want(key(v, g, l)), $sformatf("SM%0d load v%0d pg%0d ln%0d", s, v, g, l));
      loads++;
    end
    @(negedge clk); sm_resp_ready[s] = 0;
  endtask

  // ---- GC helper thread port ----
  task automatic gc_cmd(input fc_cmd_e c, input pdbn_t p, input int g, input int l, input int n,
                        output fc_resp_t last);
    @(negedge clk);
    gc_req_valid = 1;
    gc_req = '{cmd: c, src: 3'(NB), addr: '{pdbn: p, page: 9'(g), line: 5'(l)}, plbn: 10'(NBLK - 1), nlines: 6'(n), wdata: '0};
    #1;   // the network's ready depends on valid: let it settle
    while (!gc_req_ready) begin @(negedge clk); #1; end
    @(negedge clk); gc_req_valid = 0;
    gc_resp_ready = 1;
    for (int k = 0; k < ((c == FC_READ) ? n : 1); k++) begin
      while (!gc_resp_valid) @(negedge clk);
      last = gc_resp;
      if (c == FC_READ) check(gc_resp.data == '1 && gc_resp.last == (k == n - 1), "GC-port read of an erased page");
      @(negedge clk);
    end
    gc_resp_ready = 0;
  endtask

  // ---- observed events ----
  int thrash_cycles = 0, alert_cycles = 0;
  always @(posedge clk) begin
    if (redirect) thrash_cycles++;
    for (int p = 0; p < NP; p++) if (gc_alert[p]) alert_cycles++;
  end

  function automatic int l2sum(int i);
    int t = 0;
    for (int b = 0; b < NB; b++) t += int'(st_l2[b][i]);
    return t;
  endfunction
  function automatic int pkgsum(int i);
    int t = 0;
    for (int p = 0; p < NP; p++) t += int'(st_pkg[p][i]);
    return t;
  endfunction
  function automatic int tlbsum();
    int t = 0;
    for (int s = 0; s < NSM; s++) t += int'(st_tlb_miss[s]);
    return t;
  endfunction

  task automatic mech(input string name, input int n);
    $display("mechanism %-28s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  // random traffic of one SM to its own virtual blocks (v mod 4 = s)
  task automatic sm_thread(input int s);
    for (int k = 0; k < 150; k++) begin
      automatic int v = s + NSM * $urandom_range(0, NVBN / NSM - 1);
      automatic int g = $urandom_range(0, NPG - 1), l = $urandom_range(0, 31);
      if ($urandom_range(0, 3) == 0) sm_access(s, v, g, l, 1, rnd_line(), 32'h400 + 32'(8 * s), 16 * s);
      else sm_access(s, v, g, l, 0, '0, 32'h500 + 32'(8 * $urandom_range(0, 3)), 16 * $urandom_range(0, 4));
    end
  endtask

  int remap_miss, gc_ok = 0;
  initial begin
    for (int s = 0; s < NSM; s++) begin sm_req_valid[s] = 0; sm_req[s] = '0; sm_resp_ready[s] = 0; end
    dbmt_upd_valid = 0; dbmt_upd_vbn = '0; dbmt_upd_entry = '0; gc_req_valid = 0; gc_req = '0; gc_resp_ready = 0;
    repeat (3) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int v = 0; v < NVBN; v++) begin
      @(negedge clk); dbmt_upd_valid = 1; dbmt_upd_vbn = 14'(v); dbmt_upd_entry = ent(v, 0);
    end
    @(negedge clk); dbmt_upd_valid = 0;
    repeat (3) @(negedge clk);

    // 1. page fault
    sm_access(0, 40, 0, 0, 0, '0, 32'h80, 0, 1);
    // 2. streaming: trains the predictor
    for (int l = 0; l < 32; l++) sm_access(0, 0, 0, l, 0, '0, 32'h100, 0);
    // 3. few lines of many pages with the same PC
    for (int v = 0; v < NVBN; v++) for (int g = 1; g < 4; g++) for (int l = 0; l < 4; l++)
      sm_access(0, v, g, l, 0, '0, 32'h100, 0);
    // 4. merges in a flash register, loads served by registers
    for (int l = 0; l < 6; l++) sm_access(1, 1, 5, l, 1, rnd_line(), 32'h200, 1);
    for (int l = 0; l < 6; l++) sm_access(1, 1, 5, l, 0, '0, 32'h208, 1);
    // 5. stores to many distinct pages
    for (int r = 0; r < 2; r++)
      for (int g = 6; g < 12; g++) for (int v = 0; v < NVBN; v++)
        sm_access(v % NSM, v, g, r, 1, rnd_line(), 32'h300, 2);
    for (int g = 6; g < 12; g++) for (int v = 0; v < NVBN; v++)
      sm_access(v % NSM, v, g, $urandom_range(0, 2), 0, '0, 32'h308, 2);
    // 6. random parallel traffic
    fork
      sm_thread(0);
      sm_thread(1);
      sm_thread(2);
      sm_thread(3);
    join
    // 7. remap virtual block 15 to a fresh block: the TLB entry must be shot down
    sm_access(3, 15, 0, 0, 0, '0, 32'h600, 3);
    remap_miss = int'(st_tlb_miss[3]);
    @(negedge clk); dbmt_upd_valid = 1; dbmt_upd_vbn = 14'(15); dbmt_upd_entry = ent(15, 1);
    @(negedge clk); dbmt_upd_valid = 0;
    for (int k = 0; k < NPG * 32; k++) model.delete(key(15, 0, 0) + k);
    repeat (3) @(negedge clk);
    sm_access(3, 15, 0, 0, 0, '0, 32'h600, 3);
    sm_access(3, 15, 3, 9, 0, '0, 32'h600, 3);
    remap_miss = int'(st_tlb_miss[3]) - remap_miss;
    // 8. GC helper thread commands
    begin
      fc_resp_t r;
      pdbn_t p = map(15, 0);
      p.blk = 10'(9);
      gc_cmd(FC_READ, p, 2, 4, 3, r);
      gc_cmd(FC_ERASE, p, 0, 0, 1, r);
      if (r.cmd == FC_ERASE && !r.err && r.last) gc_ok++;
      check(gc_ok == 1, "GC-port erase acknowledged");
    end

    check(pkgsum(8) == 0, "no write refused by a full log block");
    mech("page fault", faults);
    mech("TLB miss", tlbsum());
    mech("TLB shootdown on remap", remap_miss);
    mech("L2 read hit", l2sum(0));
    mech("L2 read miss", l2sum(1));
    mech("L2 prefetch", l2sum(2));
    mech("prefetch size shrink", l2sum(6));
    mech("prefetch size grow", l2sum(7));
    mech("L2 eviction", l2sum(5));
    mech("thrashing (redirect on)", thrash_cycles);
    mech("write redirected to L2", l2sum(3));
    mech("pinned line write-back", l2sum(4));
    mech("flash register read hit", pkgsum(1));
    mech("flash register write merge", pkgsum(3));
    mech("flash register eviction", pkgsum(4));
    mech("register migration", pkgsum(5));
    mech("page program to log block", pkgsum(6));
    mech("read from a log page", pkgsum(7));
    mech("GC alert", alert_cycles);
    mech("GC-port erase", gc_ok);
    $display("loads %0d stores %0d", loads, stores);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
